// easytile: the EasyDRAM tile. It packs the request path between the memory
// bus and the software memory controller, the DRAM command path between that
// controller and DRAM, and the controller's own memory.
//
// Request path: memory bus interface -> tile control logic (stamps the
// arrival time) -> Incoming Req FIFO -> read by software. Response path:
// software -> Outgoing Req FIFO -> tile control logic (waits for the tag) ->
// memory bus interface. Command path: software -> command buffer -> DRAM
// Bender (flush) -> DDRx interface; read data comes back through DRAM Bender
// into the readback buffer. Two hardware paths spare software the line
// copies: readback head -> Outgoing Req FIFO (RB_OUT_PUSH_RD) and Incoming
// Req FIFO head -> command buffer write data (CB_WDATA_REQ). The memory bus
// handshakes only count in cycles where the processor clock is enabled
// (ts_proc_clk_en). The programmable core itself sits outside this
// module: its instruction port reads the scratchpad (imem_*), its data port
// (dmem_*) reaches every component through the tile interconnect. The time
// scaling counters are outside the tile too; ts_* carries the link.
//
// The component set and connections follow the paper's tile diagram; the
// programmable core, the DDRx PHY and the DRAM are not part of it and
// appear here as ports.
module easytile
  import easydram_pkg::*;
#(
  parameter int unsigned SPM_WORDS    = 8192,
  parameter int unsigned IN_DEPTH     = 16,
  parameter int unsigned OUT_DEPTH    = 16,
  parameter int unsigned CMD_DEPTH    = 256,
  parameter int unsigned WDATA_DEPTH  = 16,
  parameter int unsigned RB_DEPTH     = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // memory bus (from the last-level cache)
  input  logic                  a_valid,
  output logic                  a_ready,
  input  logic                  a_write,
  input  logic [PADDR_BITS-1:0] a_addr,
  input  logic [SRC_BITS-1:0]   a_source,
  input  logic [BEAT_BITS-1:0]  a_data,
  output logic                  d_valid,
  input  logic                  d_ready,
  output logic                  d_write,
  output logic [SRC_BITS-1:0]   d_source,
  output logic [BEAT_BITS-1:0]  d_data,
  // programmable core
  input  logic                  imem_valid,
  input  logic [MMIO_ADDR_BITS-1:0] imem_addr,
  output logic                  imem_rvalid,
  output word_t                 imem_rdata,
  input  mmio_req_t             dmem_req,
  output mmio_rsp_t             dmem_rsp,
  // DDRx interface
  output logic                  ddr_cmd_valid,
  output ddr_cmd_e              ddr_cmd,
  output logic [BANK_BITS-1:0]  ddr_bank,
  output logic [ROW_BITS-1:0]   ddr_row,
  output logic [COL_BITS-1:0]   ddr_col,
  output line_t                 ddr_wdata,
  input  logic                  ddr_rdata_valid,
  input  line_t                 ddr_rdata,
  // time scaling link
  input  logic                  ts_proc_clk_en,
  input  cnt_t                  ts_proc_cnt,
  input  cnt_t                  ts_mc_cnt,
  input  cnt_t                  ts_global_cnt,
  output logic                  ts_enable,
  output logic                  ts_critical,
  output logic                  ts_req_arrive,
  output logic                  ts_req_pending,
  output logic                  ts_mc_adv_valid,
  output cnt_t                  ts_mc_adv,
  // status
  output logic                  bender_busy
);
  mmio_req_t   slv_req [NUM_REGIONS];
  mmio_rsp_t   slv_rsp [NUM_REGIONS];

  logic        bus_req_valid, bus_req_ready, bus_resp_valid, bus_resp_ready;
  mem_req_t    bus_req;
  mem_resp_t   bus_resp;

  logic        in_push, in_full, in_empty, out_valid, out_pop;
  mem_req_t    in_din;
  mem_resp_t   out_head;

  logic        cmd_valid, cmd_pop, wdata_valid, wdata_pop;
  bender_cmd_t cmd_head;
  line_t       wdata_head;

  logic        rb_push, rb_full;
  line_t       rb_data, rb_head, req_line;
  logic        rb_head_valid, rb_hw_pop;

  tile_interconnect u_xbar (
    .clk, .rst_n,
    .core_req(dmem_req), .core_rsp(dmem_rsp),
    .slv_req, .slv_rsp
  );

  scratchpad #(.WORDS(SPM_WORDS)) u_spm (
    .clk, .rst_n,
    .if_valid(imem_valid), .if_addr(imem_addr),
    .if_rvalid(imem_rvalid), .if_rdata(imem_rdata),
    .d_req(slv_req[REGION_SPM]), .d_rsp(slv_rsp[REGION_SPM])
  );

  mem_bus_interface u_bus (
    .clk, .rst_n, .bus_en(ts_proc_clk_en),
    .a_valid, .a_ready, .a_write, .a_addr, .a_source, .a_data,
    .d_valid, .d_ready, .d_write, .d_source, .d_data,
    .req_valid(bus_req_valid), .req_ready(bus_req_ready), .req(bus_req),
    .resp_valid(bus_resp_valid), .resp_ready(bus_resp_ready), .resp(bus_resp)
  );

  tile_control u_tcl (
    .clk, .rst_n,
    .req_valid(bus_req_valid), .req_ready(bus_req_ready), .req(bus_req),
    .resp_valid(bus_resp_valid), .resp_ready(bus_resp_ready), .resp(bus_resp),
    .in_push, .in_din, .in_full, .in_empty,
    .out_valid, .out_head, .out_pop,
    .proc_cnt(ts_proc_cnt), .mc_cnt(ts_mc_cnt), .global_cnt(ts_global_cnt),
    .ts_enable, .critical(ts_critical),
    .req_arrive(ts_req_arrive), .req_pending(ts_req_pending),
    .mc_adv_valid(ts_mc_adv_valid), .mc_adv(ts_mc_adv),
    .mmio_req(slv_req[REGION_TCL]), .mmio_rsp(slv_rsp[REGION_TCL])
  );

  req_resp_buffers #(.IN_DEPTH(IN_DEPTH), .OUT_DEPTH(OUT_DEPTH)) u_fifos (
    .clk, .rst_n,
    .in_push, .in_din, .in_full, .in_empty,
    .out_head, .out_valid, .out_pop,
    .rd_valid(rb_head_valid), .rd_head(rb_head), .rd_pop(rb_hw_pop), .in_head_data(req_line),
    .mmio_req(slv_req[REGION_REQBUF]), .mmio_rsp(slv_rsp[REGION_REQBUF])
  );

  command_buffer #(.CMD_DEPTH(CMD_DEPTH), .WDATA_DEPTH(WDATA_DEPTH)) u_cmdbuf (
    .clk, .rst_n,
    .mmio_req(slv_req[REGION_CMDBUF]), .mmio_rsp(slv_rsp[REGION_CMDBUF]),
    .cmd_valid, .cmd_head, .cmd_pop,
    .wdata_valid, .wdata_head, .wdata_pop,
    .req_line
  );

  readback_buffer #(.DEPTH(RB_DEPTH)) u_rdbuf (
    .clk, .rst_n,
    .push(rb_push), .din(rb_data), .full(rb_full),
    .head_valid(rb_head_valid), .head(rb_head), .hw_pop(rb_hw_pop),
    .mmio_req(slv_req[REGION_RDBUF]), .mmio_rsp(slv_rsp[REGION_RDBUF])
  );

  dram_bender u_bender (
    .clk, .rst_n,
    .mmio_req(slv_req[REGION_BENDER]), .mmio_rsp(slv_rsp[REGION_BENDER]),
    .cmd_valid, .cmd_head, .cmd_pop,
    .wdata_valid, .wdata_head, .wdata_pop,
    .rb_push, .rb_data,
    .ddr_cmd_valid, .ddr_cmd, .ddr_bank, .ddr_row, .ddr_col, .ddr_wdata,
    .ddr_rdata_valid, .ddr_rdata,
    .busy(bender_busy)
  );
endmodule

// easydram_top: EasyDRAM between an emulated processing system and a DDR4
// device: the EasyTile plus the time scaling unit.
//
// The emulated processors and their caches reach main memory through the
// a_*/d_* memory bus and are clocked only while proc_clk_en is high; all
// processors share that one enable and the one processor cycle counter.
// The programmable core that runs the software memory controller connects
// through imem_* (instruction fetch from the scratchpad) and dmem_* (data
// port into the tile). The DDRx PHY and the DRAM connect through ddr_*.
// proc_cnt, mc_cnt and global_cnt are the time scaling counters, brought out
// for observation. Default parameters are the sizes chosen for the main
// configuration (none of them is given by the paper; see the blocks).
module easydram_top
  import easydram_pkg::*;
#(
  parameter int unsigned SPM_WORDS   = 8192,
  parameter int unsigned IN_DEPTH    = 16,
  parameter int unsigned OUT_DEPTH   = 16,
  parameter int unsigned CMD_DEPTH   = 256,
  parameter int unsigned WDATA_DEPTH = 16,
  parameter int unsigned RB_DEPTH    = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // emulated processing system: memory bus and clock enable
  input  logic                      a_valid,
  output logic                      a_ready,
  input  logic                      a_write,
  input  logic [PADDR_BITS-1:0]     a_addr,
  input  logic [SRC_BITS-1:0]       a_source,
  input  logic [BEAT_BITS-1:0]      a_data,
  output logic                      d_valid,
  input  logic                      d_ready,
  output logic                      d_write,
  output logic [SRC_BITS-1:0]       d_source,
  output logic [BEAT_BITS-1:0]      d_data,
  output logic                      proc_clk_en,
  // programmable core
  input  logic                      imem_valid,
  input  logic [MMIO_ADDR_BITS-1:0] imem_addr,
  output logic                      imem_rvalid,
  output word_t                     imem_rdata,
  input  mmio_req_t                 dmem_req,
  output mmio_rsp_t                 dmem_rsp,
  // DDRx PHY
  output logic                      ddr_cmd_valid,
  output ddr_cmd_e                  ddr_cmd,
  output logic [BANK_BITS-1:0]      ddr_bank,
  output logic [ROW_BITS-1:0]       ddr_row,
  output logic [COL_BITS-1:0]       ddr_col,
  output line_t                     ddr_wdata,
  input  logic                      ddr_rdata_valid,
  input  line_t                     ddr_rdata,
  // observation
  output cnt_t                      proc_cnt,
  output cnt_t                      mc_cnt,
  output cnt_t                      global_cnt,
  output logic                      critical,
  output logic                      bender_busy
);
  logic ts_enable, req_arrive, req_pending, mc_adv_valid;
  cnt_t mc_adv;

  easytile #(
    .SPM_WORDS(SPM_WORDS), .IN_DEPTH(IN_DEPTH), .OUT_DEPTH(OUT_DEPTH),
    .CMD_DEPTH(CMD_DEPTH), .WDATA_DEPTH(WDATA_DEPTH), .RB_DEPTH(RB_DEPTH)
  ) u_tile (
    .clk, .rst_n,
    .a_valid, .a_ready, .a_write, .a_addr, .a_source, .a_data,
    .d_valid, .d_ready, .d_write, .d_source, .d_data,
    .imem_valid, .imem_addr, .imem_rvalid, .imem_rdata,
    .dmem_req, .dmem_rsp,
    .ddr_cmd_valid, .ddr_cmd, .ddr_bank, .ddr_row, .ddr_col, .ddr_wdata,
    .ddr_rdata_valid, .ddr_rdata,
    .ts_proc_clk_en(proc_clk_en), .ts_proc_cnt(proc_cnt), .ts_mc_cnt(mc_cnt), .ts_global_cnt(global_cnt),
    .ts_enable, .ts_critical(critical),
    .ts_req_arrive(req_arrive), .ts_req_pending(req_pending),
    .ts_mc_adv_valid(mc_adv_valid), .ts_mc_adv(mc_adv),
    .bender_busy
  );

  time_scaling u_ts (
    .clk, .rst_n,
    .ts_enable, .critical, .req_arrive, .req_pending,
    .mc_adv_valid, .mc_adv,
    .proc_clk_en, .proc_cnt, .mc_cnt, .global_cnt
  );
endmodule

// dram_bender: plays a batch of DRAM commands against the DDRx interface
// with exactly the delays the software memory controller asked for.
//
// The software memory controller fills the command buffer and then writes
// DB_START (flush_commands). DRAM Bender then takes one entry per issue slot:
// it drives the command on the DDRx command port for one cycle, and the next
// command follows exactly max(delay,1) cycles later, where delay is the
// entry's own delay field. A WR command carries the next line of the write
// data queue. Read data that the interface returns (ddr_rdata_valid) is
// pushed into the readback buffer in order. The batch ends when the command
// buffer is empty, the last delay has elapsed and every read has returned;
// DB_STATUS then drops busy, and DB_CYCLES holds the batch's length in cycles
// counted from the first issue slot, which software converts into emulated
// processor cycles for time scaling. A WR with no write data queued, or a
// batch started while busy, is counted in DB_STATUS[31:16] and the WR is
// sent with zero data.
//
// Timing: START written in cycle t gives the first issue slot in cycle t+1;
// the DDRx command outputs are registered, so that command is on the port in
// cycle t+2, and busy reads 1 from cycle t+1. With no read outstanding at the
// end, DB_CYCLES is exactly the sum of max(delay,1) over the batch. The paper reuses the open-source DRAM Bender
// testing platform here and gives its role (commands with arbitrary delays
// between any two, read data and elapsed time returned). Its instruction set
// is not given, so this is a minimal sequencer of its own with one command
// plus delay per entry; a single clock for sequencer and DDRx port is also
// this design's simplification.
//
// Lint reports rst_n as both synchronous and asynchronous: the synchronous use
// is only the disable iff of the assertions below; all flops reset asynchronously.
module dram_bender
  import easydram_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // control registers (DB_*)
  input  mmio_req_t   mmio_req,
  output mmio_rsp_t   mmio_rsp,
  // command buffer
  input  logic        cmd_valid,
  input  bender_cmd_t cmd_head,
  output logic        cmd_pop,
  input  logic        wdata_valid,
  input  line_t       wdata_head,
  output logic        wdata_pop,
  // readback buffer
  output logic        rb_push,
  output line_t       rb_data,
  // DDRx interface (towards the PHY)
  output logic        ddr_cmd_valid,
  output ddr_cmd_e    ddr_cmd,
  output logic [BANK_BITS-1:0] ddr_bank,
  output logic [ROW_BITS-1:0]  ddr_row,
  output logic [COL_BITS-1:0]  ddr_col,
  output line_t       ddr_wdata,
  input  logic        ddr_rdata_valid,
  input  line_t       ddr_rdata,
  // status
  output logic        busy
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e                state;
  logic [DELAY_BITS-1:0] wait_cnt;   // cycles left before the next issue slot
  logic [15:0]           rd_outstanding;
  cnt_t                  cycles, issued;
  logic [15:0]           errors;
  logic [11:0]           off;
  logic                  wr, rd, start, issue, rd_issue;

  assign off   = mmio_req.addr[11:0];
  assign wr    = mmio_req.valid &&  mmio_req.write;
  assign rd    = mmio_req.valid && !mmio_req.write;
  assign start = wr && off == DB_START;
  assign busy  = (state != S_IDLE);

  // an issue slot: running, previous delay elapsed, a command waiting
  assign issue     = (state == S_RUN) && (wait_cnt == '0) && cmd_valid;
  assign rd_issue  = issue && cmd_head.cmd == DDR_RD;
  assign cmd_pop   = issue;
  assign wdata_pop = issue && cmd_head.cmd == DDR_WR && wdata_valid;

  assign rb_push = ddr_rdata_valid;
  assign rb_data = ddr_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ddr_cmd_valid <= 1'b0;
      ddr_cmd       <= DDR_NOP;
      ddr_bank      <= '0;
      ddr_row       <= '0;
      ddr_col       <= '0;
      ddr_wdata     <= '0;
    end else begin
      ddr_cmd_valid <= issue;
      ddr_cmd       <= issue ? cmd_head.cmd : DDR_NOP;
      if (issue) begin
        ddr_bank  <= cmd_head.bank;
        ddr_row   <= cmd_head.row;
        ddr_col   <= cmd_head.col;
        ddr_wdata <= (cmd_head.cmd == DDR_WR && wdata_valid) ? wdata_head : '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      wait_cnt       <= '0;
      rd_outstanding <= '0;
      cycles         <= '0;
      issued         <= '0;
      errors         <= '0;
    end else begin
      unique case ({rd_issue, ddr_rdata_valid})
        2'b10:   rd_outstanding <= rd_outstanding + 1'b1;
        2'b01:   if (rd_outstanding != '0) rd_outstanding <= rd_outstanding - 1'b1;
        default: rd_outstanding <= rd_outstanding;
      endcase
      if ((start && busy) || (issue && cmd_head.cmd == DDR_WR && !wdata_valid))
        errors <= errors + 1'b1;

      unique case (state)
        S_IDLE: begin
          if (start) begin
            state    <= S_RUN;
            wait_cnt <= '0;
            cycles   <= '0;
            issued   <= '0;
          end
        end
        S_RUN: begin
          if (issue) begin
            cycles   <= cycles + 1'b1;
            issued   <= issued + 1'b1;
            wait_cnt <= (cmd_head.delay == '0) ? '0 : cmd_head.delay - 1'b1;
          end else if (wait_cnt != '0) begin
            cycles   <= cycles + 1'b1;
            wait_cnt <= wait_cnt - 1'b1;
          end else begin
            // delay elapsed and nothing left to issue
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          if (rd_outstanding == '0 || (rd_outstanding == 16'd1 && ddr_rdata_valid))
            state <= S_IDLE;
          else
            cycles <= cycles + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mmio_rsp <= '0;
    end else begin
      mmio_rsp.valid <= rd;
      mmio_rsp.rdata <= '0;
      if (rd) begin
        unique case (off)
          DB_STATUS: mmio_rsp.rdata <= word_t'({errors, 15'b0, busy});
          DB_CYCLES: mmio_rsp.rdata <= cycles;
          DB_ISSUED: mmio_rsp.rdata <= issued;
          default:   mmio_rsp.rdata <= '0;
        endcase
      end
    end
  end

  a_one_cmd_per_slot: assert property (@(posedge clk) disable iff (!rst_n)
                                       issue |=> !issue || $past(cmd_head.delay) <= 1);
endmodule

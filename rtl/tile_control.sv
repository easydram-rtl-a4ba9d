// tile_control: the tile control logic. It moves main memory requests and
// responses between the memory bus interface and the hardware FIFOs on its
// own, and holds the registers through which the software memory controller
// steers time scaling.
//
// Incoming: every request assembled by the memory bus interface is stamped
// with the current processor cycle counter and pushed into the Incoming Req
// FIFO in the same cycle (req_arrive); while the FIFO is full the request
// waits on the bus. Outgoing: the head of the Outgoing Req FIFO is handed to
// the bus only once the processor cycle counter has reached the response's
// tag, so the processor never sees data earlier than the emulated system
// would deliver it. With time scaling off the tag is ignored.
//
// Registers (TCL_*): CRITICAL (set_scheduling_state), TS_ENABLE, MC_ADVANCE
// (a write adds its value to the memory controller cycle counter), the three
// counters, and request/response totals. Time scaling is on after reset.
// Reads return one cycle after the request.
//
// The paper gives the automatic insertion of requests, the sending of
// responses once valid, the critical mode register and the tagging rules; the
// register layout and the reset values are this design's choices.
//
// Lint reports rst_n as both synchronous and asynchronous: the synchronous use
// is only the disable iff of the assertions below; all flops reset asynchronously.
module tile_control
  import easydram_pkg::*;
#(
  parameter bit TS_ENABLE_RESET = 1'b1
) (
  input  logic      clk,
  input  logic      rst_n,
  // memory bus interface
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      resp_valid,
  input  logic      resp_ready,
  output mem_resp_t resp,
  // Incoming / Outgoing Req FIFOs
  output logic      in_push,
  output mem_req_t  in_din,
  input  logic      in_full,
  input  logic      in_empty,
  input  logic      out_valid,
  input  mem_resp_t out_head,
  output logic      out_pop,
  // time scaling
  input  cnt_t      proc_cnt,
  input  cnt_t      mc_cnt,
  input  cnt_t      global_cnt,
  output logic      ts_enable,
  output logic      critical,
  output logic      req_arrive,
  output logic      req_pending,
  output logic      mc_adv_valid,
  output cnt_t      mc_adv,
  // software side
  input  mmio_req_t mmio_req,
  output mmio_rsp_t mmio_rsp
);
  logic [11:0] off;
  logic        wr, rd, release_ok;
  cnt_t        req_count, resp_count;

  assign off = mmio_req.addr[11:0];
  assign wr  = mmio_req.valid &&  mmio_req.write;
  assign rd  = mmio_req.valid && !mmio_req.write;

  // ---------------------------------------------------------------- requests in
  assign req_ready  = !in_full;
  assign in_push    = req_valid && !in_full;
  assign req_arrive = in_push;
  assign req_pending = !in_empty;
  always_comb begin
    in_din     = req;
    in_din.tag = proc_cnt;
  end

  // ---------------------------------------------------------------- responses out
  assign release_ok = out_valid && (!ts_enable || out_head.tag <= proc_cnt);
  assign resp_valid = release_ok;
  assign resp       = out_head;
  assign out_pop    = release_ok && resp_ready;

  // ---------------------------------------------------------------- registers
  assign mc_adv_valid = wr && off == TCL_MC_ADVANCE;
  assign mc_adv       = mmio_req.wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      critical   <= 1'b0;
      ts_enable  <= TS_ENABLE_RESET;
      req_count  <= '0;
      resp_count <= '0;
      mmio_rsp   <= '0;
    end else begin
      if (wr && off == TCL_CRITICAL)  critical  <= mmio_req.wdata[0];
      if (wr && off == TCL_TS_ENABLE) ts_enable <= mmio_req.wdata[0];
      if (in_push) req_count  <= req_count + 1'b1;
      if (out_pop) resp_count <= resp_count + 1'b1;
      mmio_rsp.valid <= rd;
      mmio_rsp.rdata <= '0;
      if (rd) begin
        unique case (off)
          TCL_CRITICAL:   mmio_rsp.rdata <= word_t'(critical);
          TCL_TS_ENABLE:  mmio_rsp.rdata <= word_t'(ts_enable);
          TCL_PROC_CNT:   mmio_rsp.rdata <= proc_cnt;
          TCL_MC_CNT:     mmio_rsp.rdata <= mc_cnt;
          TCL_GLOBAL_CNT: mmio_rsp.rdata <= global_cnt;
          TCL_REQ_COUNT:  mmio_rsp.rdata <= req_count;
          TCL_RESP_COUNT: mmio_rsp.rdata <= resp_count;
          default:        mmio_rsp.rdata <= '0;
        endcase
      end
    end
  end

  // a response is never handed out before its tag (time scaling on)
  a_no_early_resp: assert property (@(posedge clk) disable iff (!rst_n)
                                    out_pop && ts_enable |-> out_head.tag <= proc_cnt);
endmodule

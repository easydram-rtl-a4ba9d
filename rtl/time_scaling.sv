// time_scaling: the time scaling counters and the clock enable of the
// emulated processor domain.
//
// Three counters start at zero on reset. The global counter counts every
// cycle. The processor cycle counter counts the cycles the processors have
// been allowed to run (proc_clk_en high); the memory controller cycle counter
// is the emulated time the software memory controller has accounted for.
//
// When time scaling is enabled, the domain is held whenever a request has
// just arrived, a request waits in the Incoming Req FIFO, or the software
// controller is in critical mode. While held, the processors run only while
// their counter is below the memory controller counter, and the memory
// controller counter moves only when software adds the time it spent
// (mc_adv_valid / mc_adv). Outside such a hold the processors run every
// cycle and the memory controller counter follows the processor counter, so
// after critical mode ends the processors run on until the two counters meet
// and then continue together. When time scaling is disabled the processors
// are never stopped. proc_clk_en is combinational from the inputs and the
// counters and applies to the same cycle: the counter step and the processor
// clock enable always agree.
//
// The counters, their meaning, the clock gating of all processors together,
// the hold on request arrival and the release rule follow the paper; the
// counter width and the exact priority of the conditions are this design's
// choices.
//
// Lint reports rst_n as both synchronous and asynchronous: the synchronous use
// is only the disable iff of the assertions below; all flops reset asynchronously.
module time_scaling
  import easydram_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic ts_enable,     // time scaling on (off: "no time scaling" mode)
  input  logic critical,      // software memory controller in critical mode
  input  logic req_arrive,    // a request enters the Incoming Req FIFO now
  input  logic req_pending,   // the Incoming Req FIFO is not empty
  input  logic mc_adv_valid,  // software adds mc_adv to the MC counter
  input  cnt_t mc_adv,
  output logic proc_clk_en,   // clock enable of all emulated processors
  output cnt_t proc_cnt,
  output cnt_t mc_cnt,
  output cnt_t global_cnt
);
  logic hold;
  cnt_t proc_next, mc_next;

  assign hold = ts_enable && (critical || req_pending || req_arrive);

  always_comb begin
    if (!hold)                 proc_clk_en = 1'b1;
    else                       proc_clk_en = (proc_cnt < mc_cnt);
    proc_next = proc_cnt + cnt_t'(proc_clk_en);
    mc_next   = mc_cnt + (mc_adv_valid ? mc_adv : '0);
    // outside a hold the MC counter is never behind the processor counter
    if (!hold && mc_next < proc_next) mc_next = proc_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      proc_cnt   <= '0;
      mc_cnt     <= '0;
      global_cnt <= '0;
    end else begin
      global_cnt <= global_cnt + 1'b1;
      proc_cnt   <= proc_next;
      mc_cnt     <= mc_next;
    end
  end

  // the processor never emulates ahead of the memory controller while held
  a_no_run_ahead: assert property (@(posedge clk) disable iff (!rst_n)
                                   hold && !(proc_cnt < mc_cnt) |-> !proc_clk_en);
endmodule

// tb_time_scaling: replays the emulation steps of the time scaling example
// (two processors, one request, an ACT then a READ) and checks the three
// counters and the processor clock enable cycle by cycle against a reference
// model written here, then checks the "no time scaling" mode.
module tb_time_scaling;
  import easydram_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ts_enable, critical, req_arrive, req_pending, mc_adv_valid;
  cnt_t mc_adv, proc_cnt, mc_cnt, global_cnt;
  logic proc_clk_en;

  int checks = 0, failures = 0;
  // reference model
  longint unsigned r_proc = 0, r_mc = 0, r_glob = 0;

  time_scaling dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // one cycle: set inputs, compare the enable, step the model
  task automatic step(input bit en, input bit crit, input bit arr, input bit pend,
                      input bit adv_v, input longint unsigned adv);
    bit hold, exp_en;
    ts_enable = en; critical = crit; req_arrive = arr; req_pending = pend;
    mc_adv_valid = adv_v; mc_adv = adv;
    #1;
    hold   = en && (crit || pend || arr);
    exp_en = !hold || (r_proc < r_mc);
    check(proc_clk_en == exp_en, $sformatf("clk_en at global %0d", r_glob));
    @(posedge clk);
    r_glob++;
    if (exp_en) r_proc++;
    if (adv_v) r_mc += adv;
    if (!hold && r_mc < r_proc) r_mc = r_proc;
    #1;
    check(proc_cnt == r_proc && mc_cnt == r_mc && global_cnt == r_glob,
          $sformatf("counters %0d/%0d/%0d exp %0d/%0d/%0d",
                    proc_cnt, mc_cnt, global_cnt, r_proc, r_mc, r_glob));
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int gated = 0;
  initial begin
    ts_enable = 1; critical = 0; req_arrive = 0; req_pending = 0; mc_adv_valid = 0; mc_adv = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // (a) free running: 100 cycles, all three counters equal
    repeat (100) step(1, 0, 0, 0, 0, 0);
    check(proc_cnt == 100 && mc_cnt == 100 && global_cnt == 100, "(a)->(b) counters at 100");
    // (b) a request arrives, tagged 100: processors stop at once
    step(1, 0, 1, 0, 0, 0);
    check(proc_cnt == 100, "(b) processors stopped on arrival");
    // (c) request waits, then software enters critical mode; 49 more cycles
    repeat (49) step(1, 1, 0, 1, 0, 0);
    check(proc_cnt == 100 && mc_cnt == 100 && global_cnt == 150, "(c) 100/100/150");
    // software takes the request out of the FIFO (pending drops), ACT batch runs
    repeat (50) step(1, 1, 0, 0, 0, 0);
    // (d) software advances the MC counter by the ACT time, 5 cycles
    step(1, 1, 0, 0, 1, 5);
    check(mc_cnt == 105 && proc_cnt == 100, "(d) mc 105, proc 100");
    // (e)/(f) processors run exactly 5 cycles and send two requests on the way
    for (int i = 0; i < 20; i++) begin
      if (proc_clk_en) gated = gated; else gated++;
      step(1, 1, (i == 2 || i == 4), (i > 2), 0, 0);
    end
    check(proc_cnt == 105, "(f) processors stopped at MC counter 105");
    check(gated == 15, $sformatf("(f) gated for %0d cycles", gated));
    // (g) READ accounted, 30 cycles
    step(1, 1, 0, 0, 1, 30);
    check(mc_cnt == 135, "(g) mc 135");
    // still critical: processors run up to the new MC counter value
    repeat (10) step(1, 1, 0, 0, 0, 0);
    check(proc_cnt == 115, "(g) processors run towards 135");
    // critical mode ends: processor catches up, then both count together
    repeat (40) step(1, 0, 0, 0, 0, 0);
    check(proc_cnt == mc_cnt && proc_cnt == 155, $sformatf("synchronised at %0d", proc_cnt));
    // no time scaling: never gated even in critical mode with pending requests
    repeat (30) step(0, 1, 0, 1, 0, 0);
    check(proc_cnt == 185, "no-time-scaling mode keeps running");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

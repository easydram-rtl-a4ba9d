// tb_tile_control: checks that arriving requests are stamped with the
// processor cycle counter and pushed at once, that a full FIFO holds the bus,
// that a response leaves only once the processor counter reaches its tag
// (immediately with time scaling off), and the register file (critical mode,
// time scaling enable, MC advance, counters, totals).
module tb_tile_control;
  import easydram_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      req_valid, req_ready, resp_valid, resp_ready;
  mem_req_t  req, in_din;
  mem_resp_t resp, out_head;
  logic      in_push, in_full, in_empty, out_valid, out_pop;
  cnt_t      proc_cnt, mc_cnt, global_cnt, mc_adv;
  logic      ts_enable, critical, req_arrive, req_pending, mc_adv_valid;
  mmio_req_t mmio_req;
  mmio_rsp_t mmio_rsp;

  tile_control dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic mmio(input bit w, input logic [11:0] off, input word_t d, output word_t r);
    @(negedge clk);
    mmio_req = '{valid: 1'b1, write: w, addr: {20'h10000, off}, wdata: d};
    #1;
    if (w && off == TCL_MC_ADVANCE) check(mc_adv_valid && mc_adv == d, "mc advance pulse");
    @(negedge clk);
    mmio_req = '0;
    r = mmio_rsp.rdata;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    proc_cnt   <= proc_cnt + 3;
    global_cnt <= global_cnt + 1;
  end

  initial begin
    word_t r;
    int pushes, pops;
    longint unsigned t;
    mmio_req = '0; req_valid = 0; req = '0; resp_ready = 1; in_full = 0; in_empty = 1;
    out_valid = 0; out_head = '0; proc_cnt = 0; mc_cnt = 0; global_cnt = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check(ts_enable && !critical, "reset values");
    // request stamping
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      req_valid = 1; req = '0; req.addr = $urandom; req.source = 4'(i); req.tag = 64'hdead;
      in_full = (i % 4 == 3);
      #1;
      check(in_push == !in_full && req_ready == !in_full && req_arrive == in_push, "push when room");
      check(in_din.tag == proc_cnt && in_din.addr == req.addr && in_din.source == req.source,
            "request stamped with processor counter");
      @(negedge clk); req_valid = 0;
    end
    in_full = 0;
    in_empty = 0; #1 check(req_pending, "pending follows FIFO"); in_empty = 1;
    // response release against tag
    for (int i = 0; i < 10; i++) begin
      @(negedge clk);
      out_valid = 1; out_head = '0; out_head.tag = proc_cnt + 64'(3 * $urandom_range(1, 10));
      out_head.source = 4'(i);
      t = out_head.tag;
      #1;
      while (!out_pop) begin
        check(!resp_valid && proc_cnt < t, "held before tag");
        @(negedge clk); #1;
      end
      check(proc_cnt >= t && proc_cnt < t + 3 && resp_valid && resp.source == 4'(i),
            $sformatf("released at %0d for tag %0d", proc_cnt, t));
      @(negedge clk); out_valid = 0;
    end
    // bus not ready: no pop
    @(negedge clk); out_valid = 1; out_head.tag = 0; resp_ready = 0; #1;
    check(resp_valid && !out_pop, "no pop while bus busy");
    resp_ready = 1; #1 check(out_pop, "pop when bus takes it");
    @(negedge clk); out_valid = 0;
    // time scaling off: tag ignored
    mmio(1, TCL_TS_ENABLE, 0, r);
    check(!ts_enable, "ts disabled");
    @(negedge clk); out_valid = 1; out_head.tag = '1; #1;
    check(out_pop, "tag ignored without time scaling");
    @(negedge clk); out_valid = 0;
    mmio(1, TCL_TS_ENABLE, 1, r);
    // registers
    mmio(1, TCL_CRITICAL, 1, r);   check(critical, "critical set");
    mmio(0, TCL_CRITICAL, 0, r);   check(r == 1, "critical reads back");
    mmio(1, TCL_MC_ADVANCE, 77, r);
    mc_cnt = 64'h1234;
    mmio(0, TCL_MC_CNT, 0, r);     check(r == 64'h1234, "mc counter read");
    mmio(0, TCL_PROC_CNT, 0, r);   check(r == proc_cnt - 3, "proc counter read");
    mmio(0, TCL_GLOBAL_CNT, 0, r); check(r == global_cnt - 1, "global counter read");
    mmio(0, TCL_REQ_COUNT, 0, r);  check(r == 15, $sformatf("request total %0d", r));
    mmio(0, TCL_RESP_COUNT, 0, r); check(r == 12, $sformatf("response total %0d", r));
    mmio(1, TCL_CRITICAL, 0, r);   check(!critical, "critical cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

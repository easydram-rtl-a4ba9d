// tb_mem_bus_interface: sends single-beat reads and eight-beat writes on the
// request channel with random gaps, holds the tile side back at random, and
// checks the assembled requests; then feeds responses and checks the beats,
// with random stalls of d_ready. Also checks that a_ready drops while an
// assembled request is not taken.
module tb_mem_bus_interface;
  import easydram_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, bus_en = 1'b1;
  always #5 clk = ~clk;

  logic                  a_valid, a_ready, a_write, d_valid, d_ready, d_write;
  logic [PADDR_BITS-1:0] a_addr;
  logic [SRC_BITS-1:0]   a_source, d_source;
  logic [BEAT_BITS-1:0]  a_data, d_data;
  logic                  req_valid, req_ready, resp_valid, resp_ready;
  mem_req_t              req;
  mem_resp_t             resp;

  mem_bus_interface dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected requests, checked when the tile side takes them
  mem_req_t exp_q[$];
  int       taken = 0, bp = 0;
  always @(negedge clk) begin
    if (rst_n) req_ready <= ($urandom_range(3) != 0);
  end
  always @(posedge clk) begin
    if (rst_n && a_valid && !a_ready) bp++;
    if (rst_n && req_valid && req_ready) begin
      mem_req_t e;
      e = exp_q.pop_front();
      check(req.addr == e.addr && req.write == e.write && req.source == e.source &&
            (!e.write || req.data == e.data), $sformatf("request %0d", taken));
      taken++;
    end
  end

  task automatic send(input bit w, input logic [31:0] addr, input logic [3:0] src, input line_t l);
    mem_req_t e;
    e = '0; e.addr = addr; e.write = w; e.source = src; e.data = l;
    exp_q.push_back(e);
    for (int b = 0; b < (w ? BEATS_PER_LINE : 1); b++) begin
      @(negedge clk);
      a_valid = 1; a_write = w; a_addr = addr; a_source = src; a_data = l[b*64 +: 64];
      @(posedge clk);
      while (!a_ready) @(posedge clk);
      @(negedge clk);
      a_valid = 0;
      repeat ($urandom_range(2)) @(negedge clk);
    end
  endtask

  initial begin
    mem_resp_t rs;
    a_valid = 0; a_write = 0; a_addr = 0; a_source = 0; a_data = 0;
    req_ready = 0; resp_valid = 0; resp = '0; d_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 60; i++) begin
      line_t l;
      for (int w = 0; w < 16; w++) l[w*32 +: 32] = $urandom;
      send(1'($urandom), $urandom & ~32'h3f, 4'($urandom), l);
    end
    repeat (20) @(negedge clk);
    check(taken == 60, $sformatf("%0d of 60 requests taken", taken));
    check(bp > 0, "a_ready dropped while a request waited");
    // responses
    for (int i = 0; i < 40; i++) begin
      int beats;
      rs.tag = '0; rs.source = 4'($urandom); rs.write = 1'($urandom);
      for (int w = 0; w < 16; w++) rs.data[w*32 +: 32] = $urandom;
      @(negedge clk);
      resp_valid = 1; resp = rs;
      @(posedge clk); while (!resp_ready) @(posedge clk);
      @(negedge clk); resp_valid = 0;
      beats = 0;
      while (beats < (rs.write ? 1 : BEATS_PER_LINE)) begin
        d_ready = ($urandom_range(2) != 0);
        #1;
        if (d_valid && d_ready) begin
          check(d_source == rs.source && d_write == rs.write, "response header");
          check(rs.write || d_data == rs.data[beats*64 +: 64], $sformatf("beat %0d", beats));
          beats++;
        end
        @(negedge clk);
      end
      d_ready = 0;
      @(negedge clk);
      check(!d_valid, "response complete");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_readback_buffer: pushes lines from the DRAM side, reads them word by
// word through the register window, pops them, and checks order, the count,
// and the count of lines dropped while full; then takes lines out through
// the hardware head/hw_pop port.
module tb_readback_buffer;
  import easydram_pkg::*;

  localparam int D = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      push, full, head_valid, hw_pop;
  line_t     head;
  line_t     din;
  mmio_req_t mmio_req;
  mmio_rsp_t mmio_rsp;

  readback_buffer #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic mmio(input bit w, input logic [11:0] off, input word_t d, output word_t r);
    @(negedge clk);
    mmio_req = '{valid: 1'b1, write: w, addr: {20'h40000, off}, wdata: d};
    @(negedge clk);
    mmio_req = '0;
    r = mmio_rsp.rdata;
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t l[$];
    word_t r;
    int    dropped = 0;
    mmio_req = '0; push = 0; din = '0; hw_pop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 4; round++) begin
      int n;
      n = (round == 3) ? D + 2 : 1 + round;
      l.delete();
      // back-to-back pushes
      for (int i = 0; i < n; i++) begin
        line_t y;
        for (int w = 0; w < 16; w++) y[w*32 +: 32] = $urandom;
        @(negedge clk); push = 1; din = y;
        if (i < D) l.push_back(y); else dropped++;
      end
      @(negedge clk); push = 0;
      mmio(0, RD_STATUS, 0, r);
      check(r[15:0] == l.size() && r[31:16] == dropped, $sformatf("status %h", r));
      check(full == (l.size() == D), "full flag");
      foreach (l[i]) begin
        for (int w = WORDS_PER_LINE - 1; w >= 0; w--) begin
          mmio(0, RD_DATA + 12'(8*w), 0, r);
          check(r == l[i][w*64 +: 64], $sformatf("line %0d word %0d", i, w));
        end
        mmio(1, RD_POP, 0, r);
      end
      mmio(0, RD_STATUS, 0, r);
      check(r[15:0] == 0, "empty after popping");
    end
    // hardware pops (toward the Outgoing Req FIFO)
    l.delete();
    for (int i = 0; i < 3; i++) begin
      line_t y;
      for (int w = 0; w < 16; w++) y[w*32 +: 32] = $urandom;
      @(negedge clk); push = 1; din = y; l.push_back(y);
    end
    @(negedge clk); push = 0;
    foreach (l[i]) begin
      @(negedge clk);
      check(head_valid && head == l[i], $sformatf("hardware head %0d", i));
      hw_pop = 1; @(negedge clk); hw_pop = 0;
    end
    @(negedge clk);
    check(!head_valid, "empty after hardware pops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

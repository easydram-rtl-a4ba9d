// tb_scratchpad: writes random words through the data port and reads them
// back through both the data port and the instruction port, checking the
// one-cycle read latency and read-before-write on a same-cycle access.
module tb_scratchpad;
  import easydram_pkg::*;

  localparam int W = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                      if_valid, if_rvalid;
  logic [MMIO_ADDR_BITS-1:0] if_addr;
  word_t                     if_rdata;
  mmio_req_t                 d_req;
  mmio_rsp_t                 d_rsp;

  scratchpad #(.WORDS(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t ref_mem [W];
  initial begin
    d_req = '0; if_valid = 0; if_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < W; i++) begin
      ref_mem[i] = {$urandom, $urandom};
      @(negedge clk);
      d_req = '{valid: 1'b1, write: 1'b1, addr: 32'(i * 8), wdata: ref_mem[i]};
    end
    @(negedge clk); d_req = '0;
    for (int k = 0; k < 400; k++) begin
      int a, b;
      a = $urandom_range(W - 1); b = $urandom_range(W - 1);
      @(negedge clk);
      d_req = '{valid: 1'b1, write: 1'b0, addr: 32'(a * 8), wdata: '0};
      if_valid = 1; if_addr = 32'(b * 8);
      @(negedge clk);
      d_req = '0; if_valid = 0;
      check(d_rsp.valid && d_rsp.rdata == ref_mem[a], $sformatf("data port word %0d", a));
      check(if_rvalid && if_rdata == ref_mem[b], $sformatf("fetch port word %0d", b));
    end
    // same-cycle write and fetch of one word: fetch sees the old value
    @(negedge clk);
    d_req = '{valid: 1'b1, write: 1'b1, addr: 32'h40, wdata: 64'h1234};
    if_valid = 1; if_addr = 32'h40;
    @(negedge clk);
    d_req = '0; if_valid = 0;
    check(if_rdata == ref_mem[8], "read before write");
    @(negedge clk); if_valid = 1; @(negedge clk); if_valid = 0;
    check(if_rdata == 64'h1234, "written value visible");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

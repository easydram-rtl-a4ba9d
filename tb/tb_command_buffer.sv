// tb_command_buffer: pushes commands and write-data lines through the
// register window, then drains them from the DRAM Bender side and checks
// order, contents, the status counts, and that a full queue drops pushes.
// Every other write line is taken from the request-line input instead.
module tb_command_buffer;
  import easydram_pkg::*;

  localparam int CD = 8, WD = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mmio_req_t   mmio_req;
  mmio_rsp_t   mmio_rsp;
  logic        cmd_valid, cmd_pop, wdata_valid, wdata_pop;
  bender_cmd_t cmd_head;
  line_t       wdata_head, req_line;

  command_buffer #(.CMD_DEPTH(CD), .WDATA_DEPTH(WD)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic mmio(input bit w, input logic [11:0] off, input word_t d, output word_t r);
    @(negedge clk);
    mmio_req = '{valid: 1'b1, write: w, addr: {20'h30000, off}, wdata: d};
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
    bender_cmd_t c[$];
    line_t       l[$];
    word_t       r;
    mmio_req = '0; cmd_pop = 0; wdata_pop = 0; req_line = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    mmio(0, CB_STATUS, 0, r);
    check(r == 0 && !cmd_valid && !wdata_valid, "empty after reset");
    for (int round = 0; round < 3; round++) begin
      c.delete(); l.delete();
      for (int i = 0; i < CD + 2; i++) begin
        bender_cmd_t x;
        x = bender_cmd_t'(BENDER_CMD_BITS'({$urandom, $urandom}));
        if (i < CD) c.push_back(x);
        mmio(1, CB_CMD, word_t'(x), r);
      end
      for (int k = 0; k < WD + 1; k++) begin
        line_t y;
        for (int w = 0; w < WORDS_PER_LINE; w++) begin
          word_t v;
          v = {$urandom, $urandom};
          y[w*64 +: 64] = v;
          mmio(1, CB_WDATA + 12'(8*w), v, r);
        end
        if (k < WD) l.push_back(y);
        if (k % 2 == 1) begin
          // this line comes from the incoming request instead
          for (int w = 0; w < 16; w++) req_line[w*32 +: 32] = $urandom;
          if (k < WD) l[$] = req_line;
          mmio(1, CB_WDATA_REQ, 0, r);
        end else begin
          mmio(1, CB_WDATA_PUSH, 0, r);
        end
      end
      mmio(0, CB_STATUS, 0, r);
      check(r[15:0] == CD && r[31:16] == WD, $sformatf("status %h after filling", r));
      // drain, one entry every other cycle
      foreach (c[i]) begin
        @(negedge clk);
        check(cmd_valid && cmd_head == c[i], $sformatf("command %0d", i));
        cmd_pop = 1; @(negedge clk); cmd_pop = 0;
      end
      foreach (l[i]) begin
        @(negedge clk);
        check(wdata_valid && wdata_head == l[i], $sformatf("line %0d", i));
        wdata_pop = 1; @(negedge clk); wdata_pop = 0;
      end
      @(negedge clk);
      check(!cmd_valid && !wdata_valid, "empty after draining");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

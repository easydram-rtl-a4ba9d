// tb_req_resp_buffers: pushes tagged requests from the hardware side and
// reads them field by field through the register window; stages and pushes
// responses from the software side and takes them out on the hardware side.
// Checks order, every field, the status words and the full/empty flags, the
// head line offered to the command buffer, and a response pushed with the
// readback buffer's line as data.
module tb_req_resp_buffers;
  import easydram_pkg::*;

  localparam int ID = 4, OD = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      in_push, in_full, in_empty, out_valid, out_pop, rd_valid, rd_pop;
  line_t     rd_head, in_head_data;
  mem_req_t  in_din;
  mem_resp_t out_head;
  mmio_req_t mmio_req;
  mmio_rsp_t mmio_rsp;

  req_resp_buffers #(.IN_DEPTH(ID), .OUT_DEPTH(OD)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic mmio(input bit w, input logic [11:0] off, input word_t d, output word_t r);
    @(negedge clk);
    mmio_req = '{valid: 1'b1, write: w, addr: {20'h20000, off}, wdata: d};
    @(negedge clk);
    mmio_req = '0;
    r = mmio_rsp.rdata;
  endtask

  function automatic line_t rnd_line();
    line_t y;
    for (int w = 0; w < 16; w++) y[w*32 +: 32] = $urandom;
    return y;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mem_req_t  rq[$];
    mem_resp_t rs[$];
    word_t     r;
    mmio_req = '0; in_push = 0; in_din = '0; out_pop = 0; rd_valid = 0; rd_head = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check(in_empty && !out_valid, "empty after reset");
    for (int round = 0; round < 3; round++) begin
      rq.delete(); rs.delete();
      // fill the incoming FIFO
      for (int i = 0; i < ID; i++) begin
        mem_req_t x;
        x.tag = {$urandom, $urandom}; x.source = SRC_BITS'($urandom); x.write = 1'($urandom);
        x.addr = $urandom & ~32'h3f; x.data = rnd_line();
        rq.push_back(x);
        @(negedge clk); in_push = 1; in_din = x;
      end
      @(negedge clk); in_push = 0;
      check(in_full, "incoming full");
      mmio(0, RB_IN_STATUS, 0, r);
      check(r[0] && r[23:8] == ID, $sformatf("in status %h", r));
      foreach (rq[i]) begin
        mmio(0, RB_IN_ADDR, 0, r);  check(r == word_t'(rq[i].addr), "in addr");
        mmio(0, RB_IN_INFO, 0, r);  check(r[0] == rq[i].write && r[11:8] == rq[i].source, "in info");
        mmio(0, RB_IN_TAG, 0, r);   check(r == rq[i].tag, "in tag");
        check(in_head_data == rq[i].data, "in head line to the command buffer");
        for (int w = 0; w < WORDS_PER_LINE; w++) begin
          mmio(0, RB_IN_DATA + 12'(8*w), 0, r);
          check(r == rq[i].data[w*64 +: 64], "in data");
        end
        mmio(1, RB_IN_POP, 0, r);
      end
      check(in_empty, "incoming empty after pops");
      // fill the outgoing FIFO
      for (int i = 0; i < OD; i++) begin
        mem_resp_t y;
        y.tag = {$urandom, $urandom}; y.source = SRC_BITS'($urandom); y.write = 1'($urandom);
        y.data = rnd_line();
        rs.push_back(y);
        mmio(1, RB_OUT_INFO, word_t'({y.source, 7'b0, y.write}), r);
        mmio(1, RB_OUT_TAG, y.tag, r);
        for (int w = 0; w < WORDS_PER_LINE; w++) mmio(1, RB_OUT_DATA + 12'(8*w), y.data[w*64 +: 64], r);
        mmio(1, RB_OUT_PUSH, 0, r);
      end
      mmio(0, RB_OUT_STATUS, 0, r);
      check(r[0] && r[23:8] == OD, $sformatf("out status %h", r));
      foreach (rs[i]) begin
        @(negedge clk);
        check(out_valid && out_head == rs[i], $sformatf("response %0d", i));
        out_pop = 1; @(negedge clk); out_pop = 0;
      end
      @(negedge clk);
      check(!out_valid, "outgoing empty");
      // a response whose data comes from the readback buffer
      begin
        mem_resp_t y;
        y.tag = {$urandom, $urandom}; y.source = SRC_BITS'($urandom); y.write = 1'b0;
        y.data = rnd_line();
        mmio(1, RB_OUT_INFO, word_t'({y.source, 7'b0, y.write}), r);
        mmio(1, RB_OUT_TAG, y.tag, r);
        mmio(1, RB_OUT_PUSH_RD, 0, r);             // no line ready: ignored
        check(!out_valid, "no push without a readback line");
        rd_valid = 1; rd_head = y.data;
        @(negedge clk);
        mmio_req = '{valid: 1'b1, write: 1'b1, addr: {20'h20000, RB_OUT_PUSH_RD}, wdata: '0};
        #1 check(rd_pop, "readback line taken");
        @(negedge clk);
        mmio_req = '0; rd_valid = 0;
        #1 check(!rd_pop, "one line taken");
        check(out_valid && out_head == y, "response with readback data");
        out_pop = 1; @(negedge clk); out_pop = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dram_bender: feeds DRAM Bender batches from a queue held by the test,
// answers reads like a DRAM with a fixed read latency, and checks that every
// command reaches the DDRx port in order, exactly the programmed delay after
// the previous one, that WR commands carry their write data, that read data
// lands in the readback path, and that the cycle count and busy flag match.
module tb_dram_bender;
  import easydram_pkg::*;

  localparam int RL = 7;   // read latency of the DRAM stand-in

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mmio_req_t   mmio_req;
  mmio_rsp_t   mmio_rsp;
  logic        cmd_valid, cmd_pop, wdata_valid, wdata_pop, rb_push;
  bender_cmd_t cmd_head;
  line_t       wdata_head, rb_data, ddr_wdata, ddr_rdata;
  logic        ddr_cmd_valid, ddr_rdata_valid, busy;
  ddr_cmd_e    ddr_cmd;
  logic [BANK_BITS-1:0] ddr_bank;
  logic [ROW_BITS-1:0]  ddr_row;
  logic [COL_BITS-1:0]  ddr_col;

  dram_bender dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // command and write-data queues standing in for the command buffer
  bender_cmd_t q[$];
  line_t       wq[$];
  // the heads are refreshed at the falling edge, away from the sampling edge
  always @(posedge clk) begin
    if (cmd_pop && q.size() > 0) void'(q.pop_front());
    if (wdata_pop && wq.size() > 0) void'(wq.pop_front());
  end
  always @(negedge clk) begin
    cmd_valid   = q.size() > 0;
    cmd_head    = (q.size() > 0) ? q[0] : '0;
    wdata_valid = wq.size() > 0;
    wdata_head  = (wq.size() > 0) ? wq[0] : '0;
  end

  // DRAM stand-in: a read at column c returns a line made from c after RL cycles
  logic [RL-1:0] rd_pipe = '0;
  line_t         rd_data_pipe [RL];
  always @(posedge clk) begin
    rd_pipe <= {rd_pipe[RL-2:0], ddr_cmd_valid && ddr_cmd == DDR_RD};
    rd_data_pipe[0] <= {16{22'(ddr_col), ddr_row[9:0]}};
    for (int i = 1; i < RL; i++) rd_data_pipe[i] <= rd_data_pipe[i-1];
  end
  assign ddr_rdata_valid = rd_pipe[RL-1];
  assign ddr_rdata       = rd_data_pipe[RL-1];

  // record what reaches the DDRx port
  longint unsigned cyc = 0, t_cmd[$];
  bender_cmd_t     seen[$];
  line_t           seen_wd[$], rb_seen[$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ddr_cmd_valid) begin
      bender_cmd_t c;
      c = '0;
      c.cmd = ddr_cmd; c.bank = ddr_bank; c.row = ddr_row; c.col = ddr_col;
      seen.push_back(c); t_cmd.push_back(cyc);
      if (ddr_cmd == DDR_WR) seen_wd.push_back(ddr_wdata);
    end
    if (rb_push) rb_seen.push_back(rb_data);
  end

  task automatic mmio(input bit w, input logic [11:0] off, input word_t d, output word_t r);
    @(negedge clk);
    mmio_req = '{valid: 1'b1, write: w, addr: {20'h50000, off}, wdata: d};
    @(negedge clk);
    mmio_req = '0;
    r = mmio_rsp.rdata;
    if (!w) check(mmio_rsp.valid, "read answered in one cycle");
  endtask

  function automatic bender_cmd_t mk(ddr_cmd_e c, int b, int r, int col, int d);
    bender_cmd_t x;
    x.cmd = c; x.bank = BANK_BITS'(b); x.row = ROW_BITS'(r); x.col = COL_BITS'(col);
    x.delay = DELAY_BITS'(d);
    return x;
  endfunction

  task automatic run_batch(input bender_cmd_t cmds[$], input line_t wds[$]);
    word_t r;
    longint unsigned exp_cycles = 0;
    int base_seen, base_rb, nrd = 0;
    seen.delete(); t_cmd.delete(); seen_wd.delete(); rb_seen.delete();
    foreach (cmds[i]) begin
      q.push_back(cmds[i]);
      exp_cycles += (cmds[i].delay == 0) ? 1 : cmds[i].delay;
      if (cmds[i].cmd == DDR_RD) nrd++;
    end
    foreach (wds[i]) wq.push_back(wds[i]);
    @(negedge clk);
    mmio(1, DB_START, 0, r);
    check(busy, "busy after start");
    do mmio(0, DB_STATUS, 0, r); while (r[0]);
    check(seen.size() == cmds.size(), $sformatf("issued %0d of %0d", seen.size(), cmds.size()));
    for (int i = 0; i < seen.size() && i < cmds.size(); i++) begin
      check(seen[i].cmd == cmds[i].cmd && seen[i].bank == cmds[i].bank &&
            seen[i].row == cmds[i].row && seen[i].col == cmds[i].col,
            $sformatf("command %0d fields", i));
      if (i > 0)
        check(t_cmd[i] - t_cmd[i-1] == ((cmds[i-1].delay == 0) ? 1 : cmds[i-1].delay),
              $sformatf("command %0d spacing %0d, wanted %0d", i, t_cmd[i] - t_cmd[i-1],
                        cmds[i-1].delay));
    end
    check(seen_wd.size() == wds.size() || wds.size() == 0, "write data count");
    foreach (seen_wd[i]) if (i < wds.size()) check(seen_wd[i] == wds[i], $sformatf("write data %h vs %h", seen_wd[i][31:0], wds[i][31:0]));
    check(rb_seen.size() == nrd, "read lines returned");
    foreach (rb_seen[i]) check(rb_seen[i] != '0, "read data present");
    mmio(0, DB_CYCLES, 0, r);
    // with the last delay covering the read latency the count is the delay sum
    check(r == exp_cycles, $sformatf("DB_CYCLES %0d, expected %0d", r, exp_cycles));
    mmio(0, DB_ISSUED, 0, r);
    check(r == cmds.size(), "DB_ISSUED");
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bender_cmd_t b[$];
    line_t       w[$];
    word_t       r;
    mmio_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check(!busy, "idle after reset");
    // batch 1: ACT, RD, RD, PRE with DDR4-like delays
    b = '{mk(DDR_ACT, 3, 77, 0, 13), mk(DDR_RD, 3, 77, 8, 4), mk(DDR_RD, 3, 77, 16, 9),
          mk(DDR_PRE, 3, 0, 0, 10)};
    w = '{};
    run_batch(b, w);
    check(rb_seen.size() == 2 && rb_seen[0] == {16{22'(8), 10'(77)}}, "first read carries column 8");
    // batch 2: writes with data, delay 0 treated as 1, random delays
    b = '{mk(DDR_ACT, 1, 5, 0, 0), mk(DDR_WR, 1, 5, 0, 3), mk(DDR_WR, 1, 5, 8, 2),
          mk(DDR_PRE, 1, 0, 0, 1)};
    w = '{{16{32'hCAFE0001}}, {16{32'hCAFE0002}}};
    run_batch(b, w);
    // batch 3: RowClone-like ACT-PRE-ACT with minimal gaps, then random batch
    b = '{mk(DDR_ACT, 0, 10, 0, 1), mk(DDR_PRE, 0, 10, 0, 1), mk(DDR_ACT, 0, 11, 0, 20),
          mk(DDR_PRE, 0, 0, 0, 10)};
    w = '{};
    run_batch(b, w);
    for (int k = 0; k < 5; k++) begin
      b = '{};
      for (int i = 0; i < 10; i++)
        b.push_back(mk((i % 3 == 0) ? DDR_ACT : DDR_RD, $urandom_range(15), $urandom_range(999),
                       $urandom_range(127) * 8, (i == 9) ? 20 : $urandom_range(1, 12)));
      run_batch(b, w);
    end
    // a write with no data queued counts an error
    b = '{mk(DDR_WR, 2, 2, 0, 2)};
    run_batch(b, w);
    mmio(0, DB_STATUS, 0, r);
    check(r[31:16] == 1, $sformatf("missing write data counted (%0d)", r[31:16]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

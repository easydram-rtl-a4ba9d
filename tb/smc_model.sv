// smc_model: behavioural stand-in for the programmable core running a
// software memory controller, for simulation only. It drives the core's data
// port of the tile with one register access at a time, like the core's load
// and store instructions would, and implements an open-page FCFS controller:
//
//   poll the Incoming Req FIFO; on a request enter critical mode, copy the
//   request out, build a command batch (PRE/ACT if the row is not open, then
//   RD or WR, each with its delay), flush it to DRAM Bender, wait for it,
//   read the cycles it took, turn them into emulated processor cycles
//   (SCHED_CYCLES + cycles * RATIO_NUM / RATIO_DEN), write the response tagged
//   with the memory controller counter plus that time, and advance the
//   counter by the same amount. It then waits until the processor counter has
//   caught up, and leaves critical mode once no request is left.
//
// Address mapping: addr[12:6] line in the row (column = line * 8),
// addr[16:13] bank, addr[31:17] row. The controller keeps its state in the
// scratchpad: the open row of each bank (word b: bit 63 valid, row below)
// and an 8192-bit Bloom filter of weak rows (words 64..191), built at start
// from the chip's weak-row list. With fast_trcd set, ACTs to rows that the
// filter does not hit use TRCD_FAST instead of TRCD_NOM. rc_go asks for one
// RowClone (ACT src, PRE, ACT dst with one-cycle gaps). ts_on is written to
// the time scaling enable while no request is being served. With offload
// set, request and response lines are moved by the tile's hardware paths
// (CB_WDATA_REQ, RB_OUT_PUSH_RD) instead of word by word through the core. At start it
// also stores PROG_WORDS words of a stand-in program at word 256 (value
// prog_word(i)) for the testbench to fetch through the instruction port.
module smc_model
  import easydram_pkg::*;
#(
  parameter int SCHED_CYCLES = 10,
  parameter int RATIO_NUM    = 3,
  parameter int RATIO_DEN    = 2,
  parameter int TRCD_NOM     = 9,
  parameter int TRCD_FAST    = 6,
  parameter int TRP          = 9,
  parameter int TRAS         = 22,
  parameter int TRD          = 12,
  parameter int TWR          = 12
) (
  input  logic      clk,
  input  logic      rst_n,
  output mmio_req_t dmem_req,
  input  mmio_rsp_t dmem_rsp,
  input  logic      enable,
  input  logic      fast_trcd,
  input  logic      rc_go,
  input  int        rc_bank,
  input  int        rc_src,
  input  int        rc_dst,
  input  logic      ts_on,
  input  logic      offload
);
  localparam int PROG_WORDS = 8;
  function automatic word_t prog_word(input int i);
    return 64'h0013_0000_0000_0000 ^ (64'(i) * 64'h9E37_79B9_7F4A_7C15);
  endfunction
  // statistics and results, read by the testbench
  int n_served = 0, n_hits = 0, n_misses = 0, n_crit = 0, n_adv = 0, n_fast = 0;
  int n_rc = 0, n_mismatch = 0, n_late = 0, n_offload = 0;
  longint unsigned last_adv = 0;
  bit ready = 0;
  longint unsigned adv_log [$];

  bit          critical = 0;
  bit          ts_state = 1;
  bit          bloom [8192];

  function automatic int h1(input int b, input int r); return (r * 31 + b * 17) % 8192; endfunction
  function automatic int h2(input int b, input int r); return (r * 13 + b * 101 + 7) % 8192; endfunction

  task automatic acc(input bit w, input logic [31:0] a, input word_t d, output word_t r);
    @(negedge clk);
    dmem_req = '{valid: 1'b1, write: w, addr: a, wdata: d};
    @(negedge clk);
    dmem_req = '0;
    r = dmem_rsp.rdata;
    if (!w && !dmem_rsp.valid) n_mismatch++;
  endtask

  task automatic wr(input logic [3:0] rg, input logic [11:0] off, input word_t d);
    word_t r;
    acc(1, {rg, 16'h0, off}, d, r);
  endtask

  task automatic rd(input logic [3:0] rg, input logic [11:0] off, output word_t r);
    acc(0, {rg, 16'h0, off}, '0, r);
  endtask

  task automatic push_cmd(input ddr_cmd_e c, input int b, input int r, input int col, input int d,
                          inout longint unsigned sum);
    bender_cmd_t x;
    x.cmd = c; x.bank = 4'(b); x.row = 15'(r); x.col = 10'(col); x.delay = 16'(d);
    sum += (d == 0) ? 1 : d;
    wr(4'(REGION_CMDBUF), CB_CMD, word_t'(x));
  endtask

  task automatic flush(input longint unsigned expect_cycles, output longint unsigned cyc);
    word_t r;
    wr(4'(REGION_BENDER), DB_START, 0);
    do rd(4'(REGION_BENDER), DB_STATUS, r); while (r[0]);
    rd(4'(REGION_BENDER), DB_CYCLES, r);
    cyc = r;
    if (cyc != expect_cycles) n_mismatch++;
  endtask

  task automatic serve_one();
    word_t addr, info, tag, r, mc, ort;
    line_t wline, rline;
    int b, row, col, trcd;
    bit wreq;
    longint unsigned sum, cyc, adv;
    rd(4'(REGION_REQBUF), RB_IN_ADDR, addr);
    rd(4'(REGION_REQBUF), RB_IN_INFO, info);
    rd(4'(REGION_REQBUF), RB_IN_TAG, tag);
    wreq = info[0];
    if (wreq && offload) begin
      wr(4'(REGION_CMDBUF), CB_WDATA_REQ, 0);      // line moved by hardware
    end else if (wreq) begin
      for (int w = 0; w < WORDS_PER_LINE; w++) begin
        rd(4'(REGION_REQBUF), RB_IN_DATA + 12'(8*w), r);
        wline[w*64 +: 64] = r;
      end
      for (int w = 0; w < WORDS_PER_LINE; w++) wr(4'(REGION_CMDBUF), CB_WDATA + 12'(8*w), wline[w*64 +: 64]);
      wr(4'(REGION_CMDBUF), CB_WDATA_PUSH, 0);
    end
    wr(4'(REGION_REQBUF), RB_IN_POP, 0);
    col = int'(addr[12:6]) * 8; b = int'(addr[16:13]); row = int'(addr[31:17]);
    sum = 0;
    rd(4'(REGION_SPM), 12'(8*b), ort);
    if (ort[63] && int'(ort[14:0]) == row) begin
      n_hits++;
    end else begin
      n_misses++;
      trcd = TRCD_NOM;
      if (fast_trcd) begin
        bit w1, w2;
        rd(4'(REGION_SPM), 12'(8*(64 + h1(b, row) / 64)), r); w1 = r[h1(b, row) % 64];
        rd(4'(REGION_SPM), 12'(8*(64 + h2(b, row) / 64)), r); w2 = r[h2(b, row) % 64];
        if (!(w1 && w2)) trcd = TRCD_FAST;
      end
      if (ort[63]) push_cmd(DDR_PRE, b, 0, 0, TRP, sum);
      push_cmd(DDR_ACT, b, row, 0, trcd, sum);
      if (trcd == TRCD_FAST) n_fast++;
      wr(4'(REGION_SPM), 12'(8*b), {1'b1, 48'b0, 15'(row)});
    end
    if (wreq) begin
      push_cmd(DDR_WR, b, row, col, TWR, sum);
    end else begin
      push_cmd(DDR_RD, b, row, col, TRD, sum);
    end
    flush(sum, cyc);
    if (!wreq && !offload) begin
      for (int w = 0; w < WORDS_PER_LINE; w++) begin
        rd(4'(REGION_RDBUF), RD_DATA + 12'(8*w), r);
        rline[w*64 +: 64] = r;
      end
      wr(4'(REGION_RDBUF), RD_POP, 0);
    end
    adv = longint'(SCHED_CYCLES) + (cyc * RATIO_NUM) / RATIO_DEN;
    rd(4'(REGION_TCL), TCL_MC_CNT, mc);
    wr(4'(REGION_REQBUF), RB_OUT_INFO, word_t'({info[11:8], 7'b0, wreq}));
    wr(4'(REGION_REQBUF), RB_OUT_TAG, mc + adv);
    if (!wreq && offload) begin
      wr(4'(REGION_REQBUF), RB_OUT_PUSH_RD, 0);    // line moved by hardware
      n_offload++;
    end else begin
      if (!wreq) for (int w = 0; w < WORDS_PER_LINE; w++)
        wr(4'(REGION_REQBUF), RB_OUT_DATA + 12'(8*w), rline[w*64 +: 64]);
      wr(4'(REGION_REQBUF), RB_OUT_PUSH, 0);
    end
    wr(4'(REGION_TCL), TCL_MC_ADVANCE, adv);
    last_adv = adv;
    adv_log.push_back(adv);
    n_adv++;
    n_served++;
    if (tag > mc) n_late++;
  endtask

  task automatic rowclone(input int b, input int src, input int dst);
    longint unsigned sum, cyc;
    word_t ort;
    sum = 0;
    rd(4'(REGION_SPM), 12'(8*b), ort);
    if (ort[63]) push_cmd(DDR_PRE, b, 0, 0, TRP, sum);
    push_cmd(DDR_ACT, b, src, 0, 1, sum);
    push_cmd(DDR_PRE, b, 0, 0, 1, sum);
    push_cmd(DDR_ACT, b, dst, 0, TRAS, sum);
    push_cmd(DDR_PRE, b, 0, 0, TRP, sum);
    wr(4'(REGION_SPM), 12'(8*b), 0);
    flush(sum, cyc);
    n_rc++;
  endtask

  initial begin
    word_t r, p, m;
    dmem_req = '0;
    // Bloom filter of weak rows, built before emulation starts
    for (int i = 0; i < 8192; i++) bloom[i] = 0;
    for (int b = 0; b < 16; b++)
      for (int row = 0; row < 512; row++)
        if (((row * 7 + b * 3) % 11) == 0) begin bloom[h1(b, row)] = 1; bloom[h2(b, row)] = 1; end
    @(posedge rst_n);
    for (int b = 0; b < 16; b++) wr(4'(REGION_SPM), 12'(8*b), 0);
    for (int i = 0; i < 128; i++) begin
      word_t w;
      for (int j = 0; j < 64; j++) w[j] = bloom[i*64 + j];
      wr(4'(REGION_SPM), 12'(8*(64 + i)), w);
    end
    for (int i = 0; i < PROG_WORDS; i++) wr(4'(REGION_SPM), 12'(8*(256 + i)), prog_word(i));
    ready = 1;
    forever begin
      if (enable && !critical && ts_on != ts_state) begin
        wr(4'(REGION_TCL), TCL_TS_ENABLE, word_t'(ts_on));
        ts_state = ts_on;
      end
      if (!enable) begin
        @(negedge clk);
      end else begin
        rd(4'(REGION_REQBUF), RB_IN_STATUS, r);
        if (r[0]) begin
          if (!critical) begin
            wr(4'(REGION_TCL), TCL_CRITICAL, 1);
            critical = 1;
            n_crit++;
          end
          serve_one();
          // let the processors emulate up to the accounted time first
          do begin
            rd(4'(REGION_TCL), TCL_MC_CNT, m);
            rd(4'(REGION_TCL), TCL_PROC_CNT, p);
          end while (p < m);
        end else if (critical) begin
          wr(4'(REGION_TCL), TCL_CRITICAL, 0);
          critical = 0;
        end else if (rc_go) begin
          rowclone(rc_bank, rc_src, rc_dst);
        end
      end
    end
  end
endmodule

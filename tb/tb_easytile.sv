// tb_easytile: the EasyTile on its own, with the time scaling counters
// supplied by a behavioural model in this testbench (processor counter, MC
// counter advanced by the tile's ts_mc_adv pulses, global counter), a
// software memory controller stand-in (smc_model) on the core data port and a
// DDR4 stand-in (ddr4_model). A stand-in processor issues reads and writes
// one or two at a time; it checks every read line against a reference copy
// of memory, that each read reaches the processor exactly one processor
// cycle after the emulated latency the controller computed, that the tile
// reports a request as pending from arrival until software pops it, that
// critical mode is visible on ts_critical, that the advances seen on ts_mc_adv
// add up to what the controller wrote, and that a RowClone copies a row.
module tb_easytile;
  import easydram_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  a_valid = 1'b0, a_ready, a_write = 1'b0, d_valid, d_ready, d_write;
  logic [PADDR_BITS-1:0] a_addr = '0;
  logic [SRC_BITS-1:0]   a_source = '0, d_source;
  logic [BEAT_BITS-1:0]  a_data = '0, d_data;
  logic                  imem_valid = 1'b0, imem_rvalid;
  logic [MMIO_ADDR_BITS-1:0] imem_addr = '0;
  word_t                 imem_rdata;
  mmio_req_t             dmem_req;
  mmio_rsp_t             dmem_rsp;
  logic                  ddr_cmd_valid, ddr_rdata_valid;
  ddr_cmd_e              ddr_cmd;
  logic [BANK_BITS-1:0]  ddr_bank;
  logic [ROW_BITS-1:0]   ddr_row;
  logic [COL_BITS-1:0]   ddr_col;
  line_t                 ddr_wdata, ddr_rdata;
  logic                  ts_enable, ts_critical, ts_req_arrive, ts_req_pending, ts_mc_adv_valid;
  cnt_t                  ts_mc_adv;
  logic                  bender_busy;

  // behavioural time scaling counters
  cnt_t proc_cnt = '0, mc_cnt = '0, global_cnt = '0;
  logic proc_clk_en;
  logic hold;
  assign hold        = ts_enable && (ts_critical || ts_req_pending || ts_req_arrive);
  assign proc_clk_en = !hold || (proc_cnt < mc_cnt);
  always @(posedge clk) if (rst_n) begin
    cnt_t p, m;
    p = proc_cnt + (proc_clk_en ? 1 : 0);
    m = mc_cnt + (ts_mc_adv_valid ? ts_mc_adv : 0);
    if (!hold && p > m) m = p;
    proc_cnt   <= p;
    mc_cnt     <= m;
    global_cnt <= global_cnt + 1;
  end

  easytile u_tile (
    .clk, .rst_n,
    .a_valid, .a_ready, .a_write, .a_addr, .a_source, .a_data,
    .d_valid, .d_ready, .d_write, .d_source, .d_data,
    .imem_valid, .imem_addr, .imem_rvalid, .imem_rdata, .dmem_req, .dmem_rsp,
    .ddr_cmd_valid, .ddr_cmd, .ddr_bank, .ddr_row, .ddr_col, .ddr_wdata,
    .ddr_rdata_valid, .ddr_rdata,
    .ts_proc_clk_en(proc_clk_en), .ts_proc_cnt(proc_cnt), .ts_mc_cnt(mc_cnt),
    .ts_global_cnt(global_cnt), .ts_enable, .ts_critical, .ts_req_arrive,
    .ts_req_pending, .ts_mc_adv_valid, .ts_mc_adv, .bender_busy
  );

  ddr4_model u_dram (
    .clk, .cmd_valid(ddr_cmd_valid && rst_n), .cmd(ddr_cmd), .bank(ddr_bank), .row(ddr_row),
    .col(ddr_col), .wdata(ddr_wdata), .rdata_valid(ddr_rdata_valid), .rdata(ddr_rdata)
  );

  logic smc_en = 1'b1, fast_trcd = 1'b0, rc_go = 1'b0, ts_on = 1'b1, offload = 1'b1;
  int   rc_bank = 0, rc_src = 0, rc_dst = 0;
  smc_model u_smc (.clk, .rst_n, .dmem_req, .dmem_rsp, .enable(smc_en), .fast_trcd,
                   .rc_go, .rc_bank, .rc_src, .rc_dst, .ts_on, .offload);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference memory, line address -> data; unwritten lines read as the
  // DRAM pattern of their bank, row and column
  line_t refmem [logic [31:0]];
  function automatic line_t ref_rd(input logic [31:0] a);
    if (refmem.exists(a)) return refmem[a];
    return u_dram.pattern(int'(a[16:13]), int'(a[31:17]), int'(a[12:6]));
  endfunction
  function automatic logic [31:0] laddr(input int bank, input int row, input int line);
    return {15'(row), 4'(bank), 7'(line), 6'b0};
  endfunction

  // ---------------------------------------------------------------- processor
  typedef struct { bit w; logic [31:0] a; line_t d; logic [3:0] src; } op_t;
  typedef struct { bit w; logic [31:0] a; line_t exp; longint unsigned t0; } pend_t;
  op_t   sendq [$];
  pend_t pend [16][$];
  int    max_out = 1, n_out = 0;
  longint unsigned pcycles = 0;          // processor's own cycle count
  op_t   cur;
  bit    cur_v = 0;
  int    a_beat = 0, d_beat = 0;
  line_t d_acc;
  // latency log of the last completed read
  longint unsigned last_lat = 0;
  int    n_done = 0, n_rd_done = 0, n_wack = 0;

  assign d_ready = 1'b1;

  always @(posedge clk) begin
    if (rst_n && proc_clk_en) begin
      pcycles <= pcycles + 1;
      // request channel
      if (a_valid && a_ready) begin
        if (!cur.w || a_beat == BEATS_PER_LINE - 1) begin
          pend_t p;
          p.w = cur.w; p.a = cur.a; p.t0 = pcycles;
          p.exp = cur.w ? '0 : ref_rd(cur.a);
          if (cur.w) refmem[cur.a] = cur.d;
          pend[cur.src].push_back(p);
          cur_v  = 0;
          a_beat = 0;
        end else begin
          a_beat++;
        end
      end
      // response channel
      if (d_valid) begin
        pend_t p;
        if (pend[d_source].size() == 0) begin
          check(0, $sformatf("response for idle source %0d", d_source));
        end else begin
          p = pend[d_source][0];
          check(d_write == p.w, "response kind");
          if (d_write) begin
            void'(pend[d_source].pop_front());
            n_out--; n_done++; n_wack++;
          end else begin
            if (d_beat == 0) last_lat = pcycles - p.t0;
            d_acc[d_beat*64 +: 64] = d_data;
            if (d_beat == BEATS_PER_LINE - 1) begin
              check(d_acc == p.exp, $sformatf("read data at %h", p.a));
              void'(pend[d_source].pop_front());
              n_out--; n_done++; n_rd_done++;
              d_beat = 0;
            end else d_beat++;
          end
        end
      end
    end
  end

  // drive the next operation after each edge
  always @(negedge clk) begin
    if (!cur_v && sendq.size() > 0 && n_out < max_out) begin
      cur = sendq.pop_front();
      cur_v = 1;
      n_out++;
    end
    a_valid  <= cur_v;
    a_write  <= cur.w;
    a_addr   <= cur.a;
    a_source <= cur.src;
    a_data   <= cur.d[a_beat*64 +: 64];
  end

  task automatic send(input bit w, input logic [31:0] a, input logic [3:0] src);
    op_t o;
    o.w = w; o.a = a; o.src = src;
    for (int i = 0; i < 16; i++) o.d[i*32 +: 32] = $urandom;
    sendq.push_back(o);
  endtask

  task automatic drain();
    while (sendq.size() > 0 || n_out > 0 || cur_v) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  // tile outputs against the software's view
  longint unsigned adv_sum = 0;
  int crit_cycles = 0, pend_bad = 0, n_in = 0, n_pop = 0;
  always @(posedge clk) if (rst_n) begin
    // a request is pending from the cycle after its arrival until it is popped
    if (ts_req_pending != (n_in > n_pop)) pend_bad++;
    if (ts_mc_adv_valid) adv_sum <= adv_sum + ts_mc_adv;
    if (ts_critical) crit_cycles++;
    if (ts_req_arrive) n_in++;
    if (dmem_req.valid && dmem_req.write && dmem_req.addr == {4'(REGION_REQBUF), 16'h0, RB_IN_POP}) n_pop++;
  end

  initial begin
    int lat_ok, n_clone0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (u_smc.ready);
    lat_ok = 0;
    max_out = 1;
    for (int k = 0; k < 30; k++) begin
      bit w;
      w = ($urandom_range(0, 2) == 0);
      send(w, laddr($urandom_range(0, 15), $urandom_range(3, 5), $urandom_range(0, 127)), 4'(k % 4));
      drain();
      if (!w) check(last_lat == u_smc.last_adv + 1,
                    $sformatf("latency %0d for emulated %0d", last_lat, u_smc.last_adv));
    end
    max_out = 2;
    for (int k = 0; k < 30; k++)
      send($urandom_range(0, 1) == 0, laddr($urandom_range(0, 3), $urandom_range(3, 4),
           $urandom_range(0, 3)), 4'(k % 4));
    drain();
    // RowClone row 7 -> row 100 of bank 3
    max_out = 1;
    send(1, laddr(3, 7, 2), 1);
    drain();
    n_clone0 = u_dram.n_clone;
    rc_bank = 3; rc_src = 7; rc_dst = 100;
    @(negedge clk) rc_go = 1'b1;
    wait (u_smc.n_rc > 0);
    rc_go = 1'b0;
    for (int c = 0; c < 128; c++) refmem[laddr(3, 100, c)] = ref_rd(laddr(3, 7, c));
    for (int c = 0; c < 4; c++) send(0, laddr(3, 100, c), 4'(c));
    drain();
    check(u_dram.n_clone == n_clone0 + 1, "RowClone in DRAM");
    begin
      longint unsigned s;
      s = 0;
      foreach (u_smc.adv_log[i]) s += u_smc.adv_log[i];
      check(adv_sum == s, $sformatf("MC advances %0d vs written %0d", adv_sum, s));
    end
    check(crit_cycles > 0, "critical mode seen on ts_critical");
    check(!ts_critical, "critical mode left at the end");
    check(pend_bad == 0, $sformatf("pending flag wrong in %0d cycles", pend_bad));
    check(n_in == u_smc.n_served && n_done == n_in, "every request served once");
    check(n_wack > 0 && n_rd_done > 0, "reads and writes");
    check(u_dram.n_err == 0 && u_smc.n_mismatch == 0, "legal DRAM sequences, batch cycle counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

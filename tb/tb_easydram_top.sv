// tb_easydram_top: end-to-end test of the whole design at its default sizes.
//
// Around easydram_top it places three stand-ins: a processor that issues
// cache-line reads and writes on the memory bus and counts its own clock
// cycles (it only advances while the time scaling clock enable is high), a
// software memory controller (smc_model) on the programmable core's data
// port, and a DDR4 device (ddr4_model) on the command port. A reference copy
// of memory is kept here; every read response is compared with it.
//
// Phases:
//   1  time scaling on, one request at a time: data, row hits and misses,
//      and the processor-visible read latency, which must equal the
//      controller's emulated latency plus a small fixed overhead however long
//      the controller really took;
//   2  time scaling on, up to four requests in flight from four sources:
//      requests arriving in critical mode and responses held back by tag;
//   3  RowClone of one row into another of the same subarray, checked by
//      reading the destination through the bus;
//   4  reduced tRCD on rows the weak-row filter does not hit: data must stay
//      correct while fast ACTs are used;
//   5  time scaling off with the controller paused: 20 writes fill the
//      Incoming Req FIFO and back-pressure the bus, the processor is never
//      stopped, then everything drains.
// Each mechanism is counted and a mechanism that never happened is a failure.
module tb_easydram_top;
  import easydram_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // ---------------------------------------------------------------- DUT
  logic                  a_valid = 1'b0, a_ready, a_write = 1'b0, d_valid, d_ready, d_write;
  logic [PADDR_BITS-1:0] a_addr = '0;
  logic [SRC_BITS-1:0]   a_source = '0, d_source;
  logic [BEAT_BITS-1:0]  a_data = '0, d_data;
  logic                  proc_clk_en, imem_valid = 1'b0, imem_rvalid;
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
  cnt_t                  proc_cnt, mc_cnt, global_cnt;
  logic                  critical, bender_busy;

  easydram_top u_dut (.*);

  ddr4_model u_dram (
    .clk, .cmd_valid(ddr_cmd_valid && rst_n), .cmd(ddr_cmd), .bank(ddr_bank), .row(ddr_row),
    .col(ddr_col), .wdata(ddr_wdata), .rdata_valid(ddr_rdata_valid), .rdata(ddr_rdata)
  );

  logic smc_en = 1'b1, fast_trcd = 1'b0, rc_go = 1'b0, ts_on = 1'b1, offload = 1'b1;
  int   rc_bank = 0, rc_src = 0, rc_dst = 0;
  smc_model u_smc (.clk, .rst_n, .dmem_req, .dmem_rsp, .enable(smc_en), .fast_trcd,
                   .rc_go, .rc_bank, .rc_src, .rc_dst, .ts_on, .offload);

  // ---------------------------------------------------------------- checking
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: bender busy=%0d rb=%0d ts=%0d proc=%0d mc=%0d", bender_busy, u_dut.u_tile.u_rdbuf.count, u_dut.ts_enable, proc_cnt, mc_cnt);
    $display("watchdog expired: sendq=%0d n_out=%0d cur_v=%0d served=%0d crit=%0d in_count=%0d", sendq.size(), n_out, cur_v, u_smc.n_served, critical, u_dut.u_tile.u_fifos.in_count);
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

  // ---------------------------------------------------------------- mechanism counters
  int m_gated = 0, m_held = 0, m_bp = 0, m_arrive_crit = 0, m_gated_nots = 0;
  int m_nots_cycles = 0, m_multi_src = 0, m_weak = 0;
  longint unsigned gcyc = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      gcyc <= gcyc + 1;
      if (!proc_clk_en) m_gated++;
      if (u_dut.u_tile.u_tcl.out_valid && !u_dut.u_tile.u_tcl.release_ok) m_held++;
      if (a_valid && !a_ready) m_bp++;
      if (u_dut.u_tile.ts_req_arrive && critical) m_arrive_crit++;
      if (!u_dut.ts_enable) begin
        m_nots_cycles++;
        if (!proc_clk_en) m_gated_nots++;
      end
      if (u_dut.u_tile.u_fifos.in_count >= 2) m_multi_src++;
    end
  end

  // ---------------------------------------------------------------- phases
  initial begin
    int lat_min, lat_max, nlat, n_corrupt0, n_clone0, n_fast0;
    longint unsigned g0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (u_smc.ready);

    // instruction fetch of the stored program
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      imem_valid = 1'b1; imem_addr = 32'(8 * (256 + i));
      @(negedge clk);
      imem_valid = 1'b0;
      check(imem_rvalid && imem_rdata == u_smc.prog_word(i), "instruction fetch");
    end

    // 1: one at a time, a few banks and rows, reads and writes; lines
    //    copied by software in the first half, by the tile in the second
    max_out = 1;
    offload = 1'b0;
    lat_min = 1 << 30; lat_max = 0; nlat = 0;
    for (int k = 0; k < 40; k++) begin
      logic [31:0] a;
      bit w;
      a = laddr($urandom_range(0, 3), $urandom_range(10, 12), $urandom_range(0, 7));
      w = ($urandom_range(0, 2) == 0);
      if (k == 20) offload = 1'b1;
      g0 = gcyc;
      send(w, a, 4'(k % 4));
      drain();
      if (!w) begin
        int ov;
        ov = int'(last_lat) - int'(u_smc.last_adv);
        nlat++;
        if (ov < lat_min) lat_min = ov;
        if (ov > lat_max) lat_max = ov;
        check(gcyc - g0 > last_lat + 50, "controller took longer than the emulated latency");
      end
    end
    $display("phase 1: latency - emulated in [%0d, %0d] over %0d reads", lat_min, lat_max, nlat);
    check(nlat > 0 && lat_min >= 0 && lat_max <= 4, "latency equals emulated latency plus overhead");
    check(u_smc.n_hits > 0 && u_smc.n_misses > 0, "row hits and misses both seen");

    // 2: four in flight, four sources
    max_out = 4;
    for (int k = 0; k < 48; k++)
      send($urandom_range(0, 3) == 0, laddr($urandom_range(0, 15), $urandom_range(20, 23),
           $urandom_range(0, 127)), 4'(k % 4));
    drain();

    // 3: RowClone row 40 -> row 300 of bank 6 (same 512-row subarray)
    max_out = 1;
    for (int c = 0; c < 4; c++) send(1, laddr(6, 40, c), 4'(c));
    send(0, laddr(6, 300, 0), 0);            // destination before the copy
    drain();
    n_clone0 = u_dram.n_clone;
    rc_bank = 6; rc_src = 40; rc_dst = 300;
    @(negedge clk) rc_go = 1'b1;
    wait (u_smc.n_rc > 0);
    rc_go = 1'b0;
    check(u_dram.n_clone == n_clone0 + 1, "DRAM saw a RowClone");
    for (int c = 0; c < 128; c++) refmem[laddr(6, 300, c)] = ref_rd(laddr(6, 40, c));
    for (int c = 0; c < 8; c++) send(0, laddr(6, 300, c * 17 % 128), 4'(c % 4));
    drain();

    // 4: reduced tRCD
    fast_trcd = 1'b1;
    n_corrupt0 = u_dram.n_corrupt;
    n_fast0 = u_smc.n_fast;
    for (int k = 0; k < 60; k++) begin
      int b, r;
      b = $urandom_range(0, 15); r = $urandom_range(0, 200);
      if (k % 5 == 0) while (!u_dram.is_weak(b, r)) r++;   // some weak rows for sure
      if (u_dram.is_weak(b, r)) m_weak++;
      send(0, laddr(b, r, $urandom_range(0, 127)), 4'(k % 4));
    end
    max_out = 2;
    drain();
    fast_trcd = 1'b0;
    check(u_smc.n_fast > n_fast0 + 30, $sformatf("fast ACTs used: %0d", u_smc.n_fast - n_fast0));
    check(m_weak > 0, "weak rows read");
    check(u_dram.n_corrupt == n_corrupt0, "no read before the row's tRCD");

    // 5: time scaling off, controller paused, back-pressure
    ts_on = 1'b0;
    wait (!u_dut.ts_enable);
    smc_en = 1'b0;
    max_out = 20;
    for (int k = 0; k < 20; k++) send(1, laddr(9, 50, k), 4'(k % 16));
    repeat (400) @(posedge clk);
    check(u_dut.u_tile.u_fifos.in_full, "Incoming Req FIFO full");
    check(!a_ready && a_valid, "bus held back");
    smc_en = 1'b1;
    drain();
    max_out = 1;
    for (int c = 0; c < 4; c++) send(0, laddr(9, 50, c * 5), 4'(c));
    drain();
    ts_on = 1'b1;
    wait (u_dut.ts_enable);
    send(0, laddr(1, 10, 1), 0);
    drain();

    // counters and totals
    check(pcycles == proc_cnt, $sformatf("processor cycles %0d vs counter %0d", pcycles, proc_cnt));
    check(gcyc == global_cnt, "global counter counts every cycle");
    check(u_dut.u_tile.u_tcl.req_count == 64'(u_smc.n_served), "request count");
    check(u_dut.u_tile.u_tcl.resp_count == 64'(n_done), "response count");
    check(u_dram.n_err == 0, "legal DRAM command sequences");
    check(u_smc.n_mismatch == 0, "controller saw expected batch cycle counts");

    $display("mechanisms: gated=%0d crit_entries=%0d mc_adv=%0d held=%0d arrive_in_crit=%0d",
             m_gated, u_smc.n_crit, u_smc.n_adv, m_held, m_arrive_crit);
    $display("            backpressure=%0d multi_pending=%0d rowclone=%0d fast_act=%0d",
             m_bp, m_multi_src, u_dram.n_clone, u_smc.n_fast);
    $display("            hits=%0d misses=%0d write_acks=%0d reads=%0d nots_cycles=%0d nots_gated=%0d",
             u_smc.n_hits, u_smc.n_misses, n_wack, n_rd_done, m_nots_cycles, m_gated_nots);
    check(m_gated > 0, "clock gating happened");
    check(u_smc.n_crit > 0, "critical mode entered");
    check(u_smc.n_offload > 0 && u_smc.n_offload < n_rd_done, "responses built by software and by the tile");
    check(u_smc.n_adv > 0, "MC counter advanced");
    check(m_held > 0, "response held until its tag");
    check(m_arrive_crit > 0, "request arrived in critical mode");
    check(m_bp > 0, "bus back-pressure");
    check(m_multi_src > 0, "several requests pending");
    check(u_dram.n_clone > 0, "RowClone");
    check(u_smc.n_fast > 0, "reduced tRCD");
    check(u_smc.n_hits > 0 && u_smc.n_misses > 0, "row hits and misses");
    check(n_wack > 0 && n_rd_done > 0, "reads and write acks");
    check(m_nots_cycles > 0 && m_gated_nots == 0, "no gating without time scaling");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

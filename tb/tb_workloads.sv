// tb_workloads: small versions of the workloads the design is meant to run,
// on the whole design at its default sizes, with the same stand-ins as the
// end-to-end test (processor, software memory controller, DDR4 model).
//
//   latency  an lmbench-style chain of dependent loads over footprints of
//            8 KiB, 64 KiB and 1 MiB, with and without time scaling: with it,
//            the processor must see exactly the emulated latency (+1) of
//            every load; the average cycles per load are printed;
//   tRCD     the same random read stream over many rows with nominal and with
//            reduced tRCD (weak rows kept nominal by the Bloom filter): the
//            reduced run must take fewer processor cycles and return correct
//            data;
//   RowClone a Copy of 8 KiB and of 16 KiB (one and two rows) done by the
//            processor with loads and stores and done by RowClone, without
//            time scaling: the destination must hold the source data and
//            RowClone must take less time.
module tb_workloads;
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
    repeat (2000000) @(posedge clk);
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

  task automatic set_ts(input bit on);
    ts_on = on;
    wait (u_dut.ts_enable == on);
  endtask

  initial begin
    longint unsigned p0, g0, t_nom, t_fast, t_cpu, t_rc, adv0;
    int n_adv0;
    int sizes [3] = '{8, 64, 1024};
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (u_smc.ready);

    // ---------------- latency sweep
    for (int ts = 1; ts >= 0; ts--) begin
      set_ts(ts[0]);
      for (int si = 0; si < 3; si++) begin
        int lines;
        longint unsigned sum_lat, sum_adv;
        lines = sizes[si] * 1024 / 64;
        sum_lat = 0; sum_adv = 0;
        max_out = 1;
        for (int k = 0; k < 40; k++) begin
          logic [31:0] a;
          a = 32'(64 * $urandom_range(0, lines - 1)) + 32'h0100_0000;
          send(0, a, 4'(k % 4));
          drain();
          sum_lat += last_lat;
          sum_adv += u_smc.last_adv + 1;
        end
        $display("latency: %0s footprint %0d KiB: %0d.%02d processor cycles per load",
                 ts ? "time scaling   " : "no time scaling", sizes[si], sum_lat / 40,
                 (sum_lat % 40) * 100 / 40);
        if (ts) check(sum_lat == sum_adv, "time-scaled loads see the emulated latency");
        else    check(sum_lat > sum_adv, "without time scaling loads see the real latency");
      end
    end
    set_ts(1);

    // ---------------- tRCD reduction
    begin
      logic [31:0] stream [$];
      int c0;
      for (int k = 0; k < 80; k++)
        stream.push_back(laddr($urandom_range(0, 15), $urandom_range(0, 400), $urandom_range(0, 127)));
      c0 = u_dram.n_corrupt;
      for (int pass = 0; pass < 2; pass++) begin
        fast_trcd = pass[0];
        max_out = 2;
        p0 = pcycles;
        foreach (stream[i]) send(0, stream[i], 4'(i % 4));
        drain();
        if (pass == 0) t_nom = pcycles - p0; else t_fast = pcycles - p0;
      end
      fast_trcd = 1'b0;
      $display("tRCD: nominal %0d, reduced %0d processor cycles, speedup %0d.%03d", t_nom, t_fast,
               t_nom / t_fast, (t_nom % t_fast) * 1000 / t_fast);
      check(t_fast < t_nom, "reduced tRCD is faster");
      check(u_dram.n_corrupt == c0, "reduced tRCD keeps data correct");
    end

    // ---------------- RowClone Copy
    set_ts(0);
    for (int rows = 1; rows <= 2; rows++) begin
      int b, src, dst;
      b = 5;
      // CPU copy: rows 60.. -> rows 70..
      max_out = 4;
      g0 = global_cnt;
      for (int r = 0; r < rows; r++)
        for (int c = 0; c < 128; c++) begin
          send(0, laddr(b, 60 + r, c), 4'(c % 4));
        end
      drain();
      for (int r = 0; r < rows; r++)
        for (int c = 0; c < 128; c++) send(1, laddr(b, 70 + r, c), 4'(c % 4));
      drain();
      t_cpu = global_cnt - g0;
      // RowClone: rows 80.. -> rows 90.. (all in subarray 0)
      g0 = global_cnt;
      for (int r = 0; r < rows; r++) begin
        int n0;
        n0 = u_smc.n_rc;
        rc_bank = b; rc_src = 80 + r; rc_dst = 90 + r;
        @(negedge clk) rc_go = 1'b1;
        wait (u_smc.n_rc == n0 + 1);
        rc_go = 1'b0;
        for (int c = 0; c < 128; c++) refmem[laddr(b, 90 + r, c)] = ref_rd(laddr(b, 80 + r, c));
      end
      t_rc = global_cnt - g0;
      $display("RowClone Copy %0d KiB: CPU %0d cycles, RowClone %0d cycles", rows * 8, t_cpu, t_rc);
      check(t_rc < t_cpu, "RowClone faster than CPU copy");
      max_out = 1;
      for (int r = 0; r < rows; r++)
        for (int c = 0; c < 128; c += 9) send(0, laddr(b, 90 + r, c), 4'(c % 4));
      drain();
    end
    check(u_dram.n_err == 0 && u_smc.n_mismatch == 0, $sformatf("legal DRAM sequences: %0d %0d", u_dram.n_err, u_smc.n_mismatch));
    check(pcycles == proc_cnt, "processor cycle count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tile_interconnect: puts a register-file stand-in behind every region,
// sends random reads and writes, and checks that only the addressed region
// sees each request, that read data comes back from the right region one
// cycle later, and that unmapped regions answer all ones.
module tb_tile_interconnect;
  import easydram_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mmio_req_t core_req;
  mmio_rsp_t core_rsp;
  mmio_req_t slv_req [NUM_REGIONS];
  mmio_rsp_t slv_rsp [NUM_REGIONS];

  tile_interconnect dut (.*);

  // each stand-in holds 16 words and adds its region number to read data
  word_t regs [NUM_REGIONS][16];
  int    hits [NUM_REGIONS];
  for (genvar g = 0; g < NUM_REGIONS; g++) begin : g_slv
    always @(posedge clk) begin
      slv_rsp[g].valid <= slv_req[g].valid && !slv_req[g].write && rst_n;
      slv_rsp[g].rdata <= regs[g][slv_req[g].addr[6:3]] + word_t'(g);
      if (slv_req[g].valid) begin
        hits[g]++;
        if (slv_req[g].write) regs[g][slv_req[g].addr[6:3]] <= slv_req[g].wdata;
      end
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t model [NUM_REGIONS][16];
  initial begin
    for (int i = 0; i < NUM_REGIONS; i++) begin
      hits[i] = 0;
      for (int j = 0; j < 16; j++) begin regs[i][j] = '0; model[i][j] = '0; end
    end
    core_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 600; k++) begin
      int reg_i, rgn, prev_hits [NUM_REGIONS];
      bit w;
      word_t v;
      rgn = $urandom_range(NUM_REGIONS + 1);   // sometimes unmapped
      reg_i = $urandom_range(15);
      w = 1'($urandom);
      v = {$urandom, $urandom};
      foreach (hits[i]) prev_hits[i] = hits[i];
      @(negedge clk);
      core_req = '{valid: 1'b1, write: w, addr: {4'(rgn), 21'($urandom), 4'(reg_i), 3'b0}, wdata: v};
      @(negedge clk);
      core_req = '0;
      if (rgn < NUM_REGIONS) begin
        if (w) model[rgn][reg_i] = v;
        else check(core_rsp.valid && core_rsp.rdata == model[rgn][reg_i] + word_t'(rgn),
                   $sformatf("read region %0d reg %0d", rgn, reg_i));
      end else if (!w) begin
        check(core_rsp.valid && core_rsp.rdata == '1, "unmapped read");
      end
      if (w) check(!core_rsp.valid, "no answer to a write");
      foreach (hits[i])
        check(hits[i] == prev_hits[i] + ((i == rgn) ? 1 : 0), $sformatf("only region %0d selected", rgn));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

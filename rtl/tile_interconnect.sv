// tile_interconnect: connects the programmable core's data port to the
// scratchpad and to the register windows of the tile's components.
//
// The region field addr[31:28] selects one of NUM_REGIONS targets
// (REGION_* in easydram_pkg); only that target sees the request, with its
// address unchanged. Every target answers a read exactly one cycle later,
// and the interconnect returns that answer to the core. A read of an
// unmapped region answers all ones, one cycle later, so the core never waits
// forever; writes to it are dropped. No wait states, single master.
// The paper shows the interconnect and what it connects; this decoder and
// its address map are this design's own.
module tile_interconnect
  import easydram_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  mmio_req_t core_req,
  output mmio_rsp_t core_rsp,
  output mmio_req_t slv_req [NUM_REGIONS],
  input  mmio_rsp_t slv_rsp [NUM_REGIONS]
);
  logic [3:0] region;
  logic       unmapped_rd_q;

  assign region = core_req.addr[31:28];

  always_comb begin
    for (int i = 0; i < NUM_REGIONS; i++) begin
      slv_req[i]       = core_req;
      slv_req[i].valid = core_req.valid && (region == 4'(i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) unmapped_rd_q <= 1'b0;
    else        unmapped_rd_q <= core_req.valid && !core_req.write &&
                                 (region >= 4'(NUM_REGIONS));
  end

  always_comb begin
    core_rsp = '0;
    for (int i = 0; i < NUM_REGIONS; i++) begin
      if (slv_rsp[i].valid) core_rsp = slv_rsp[i];
    end
    if (unmapped_rd_q) core_rsp = '{valid: 1'b1, rdata: '1};
  end
endmodule

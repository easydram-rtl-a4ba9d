// scratchpad: on-tile instruction and data memory of the programmable core.
//
// The software memory controller's code, its request table and other data
// live here. The memory is an array of WORDS 64-bit words with two ports: a
// read-only instruction fetch port and a read/write data port reached through
// the tile interconnect. Both ports return read data one cycle after the
// request; a write on the data port takes effect at the clock edge, and a
// read of the same word in the same cycle returns the old value. Contents are
// not reset; only the two read-valid flags are. The paper names the scratchpad and its use; its size (64 KiB)
// and the two-port, one-cycle organisation are this design's choices.
module scratchpad
  import easydram_pkg::*;
#(
  parameter int unsigned WORDS = 8192   // 64 KiB of 64-bit words
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // instruction fetch port (byte address, word aligned)
  input  logic                       if_valid,
  input  logic [MMIO_ADDR_BITS-1:0]  if_addr,
  output logic                       if_rvalid,
  output word_t                      if_rdata,
  // data port from the interconnect
  input  mmio_req_t                  d_req,
  output mmio_rsp_t                  d_rsp
);
  localparam int unsigned AW = $clog2(WORDS);

  word_t          mem [WORDS];
  logic [AW-1:0]  if_idx, d_idx;

  assign if_idx = if_addr[AW+2:3];
  assign d_idx  = d_req.addr[AW+2:3];

  logic  d_rvalid;
  word_t d_rdata;

  assign d_rsp = '{valid: d_rvalid, rdata: d_rdata};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      if_rvalid <= 1'b0;
      d_rvalid  <= 1'b0;
    end else begin
      if_rvalid <= if_valid;
      d_rvalid  <= d_req.valid && !d_req.write;
    end
  end

  always_ff @(posedge clk) begin
    if_rdata <= mem[if_idx];
    d_rdata  <= mem[d_idx];
    if (d_req.valid && d_req.write) mem[d_idx] <= d_req.wdata;
  end
endmodule

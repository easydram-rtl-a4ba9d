// readback_buffer: holds the cache lines that DRAM Bender read from DRAM
// until the software memory controller copies them into responses.
//
// DRAM Bender pushes one 512-bit line per completed read burst (push/din).
// The core sees the oldest line as eight 64-bit words at RD_DATA, the number
// of lines held at RD_STATUS, and drops the oldest line with RD_POP. Reads
// return one cycle after the request. When the buffer is full a new line is
// dropped and counted in the upper half of RD_STATUS so that software can
// notice it. The oldest line is also offered to the response FIFO
// (head_valid/head); hw_pop drops it in the same cycle the response FIFO
// takes it, so software need not copy it word by word. The buffer's role
// and the offload follow the paper; the line granularity, the
// depth (16 lines), the overflow counter and the hardware port are this
// design's choices.
module readback_buffer
  import easydram_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  // DRAM Bender side
  input  logic      push,
  input  line_t     din,
  output logic      full,
  // hardware path to the Outgoing Req FIFO
  output logic      head_valid,
  output line_t     head,
  input  logic      hw_pop,
  // software side
  input  mmio_req_t mmio_req,
  output mmio_rsp_t mmio_rsp
);
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [11:0]   off;
  logic          wr, rd, empty;
  logic [CW-1:0] count;
  logic [15:0]   dropped;

  assign off = mmio_req.addr[11:0];
  assign wr  = mmio_req.valid &&  mmio_req.write;
  assign rd  = mmio_req.valid && !mmio_req.write;

  assign head_valid = !empty;

  sync_fifo #(.T(line_t), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .push(push && !full), .din(din), .full(full),
    .pop((hw_pop || (wr && off == RD_POP)) && !empty), .dout(head), .empty(empty), .count(count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mmio_rsp <= '0;
      dropped  <= '0;
    end else begin
      if (push && full) dropped <= dropped + 1'b1;
      mmio_rsp.valid <= rd;
      mmio_rsp.rdata <= '0;
      if (rd) begin
        if (off == RD_STATUS) mmio_rsp.rdata <= word_t'({16'(dropped), 16'(count)});
        for (int w = 0; w < WORDS_PER_LINE; w++)
          if (off == RD_DATA + 12'(8*w)) mmio_rsp.rdata <= head[w*WORD_BITS +: WORD_BITS];
      end
    end
  end
endmodule

// req_resp_buffers: the Incoming Req FIFO and the Outgoing Req FIFO of the
// tile, with the register window through which the software memory
// controller reads requests and writes responses.
//
// Hardware side: the tile control logic pushes each arriving main memory
// request (already tagged with its arrival time) into the incoming FIFO, and
// pops the outgoing FIFO's head once that response may be delivered.
// Software side (mmio, registers RB_* of easydram_pkg): the core reads the
// head request field by field (status, address, info, tag, eight data words)
// and drops it with RB_IN_POP; it stages a response (info, tag, eight data
// words) and pushes it with RB_OUT_PUSH. Reads return one cycle after the
// request. A push into a full outgoing FIFO is dropped; software checks
// RB_OUT_STATUS first. Offload: RB_OUT_PUSH_RD pushes the staged response
// with the readback buffer's head line (rd_head) as its data and pops that
// line (rd_pop, same cycle); it is ignored while rd_valid is low. The head
// request's line is offered on in_head_data for the command buffer. That
// the two FIFOs exist, what they hold, and that hardware can move lines for
// the core follow the paper; their depths (16 each) and the register layout
// are this design's choices.
module req_resp_buffers
  import easydram_pkg::*;
#(
  parameter int unsigned IN_DEPTH  = 16,
  parameter int unsigned OUT_DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  // hardware side: incoming requests
  input  logic       in_push,
  input  mem_req_t   in_din,
  output logic       in_full,
  output logic       in_empty,
  // hardware side: outgoing responses
  output mem_resp_t  out_head,
  output logic       out_valid,
  input  logic       out_pop,
  // hardware data paths: readback buffer head into a response, request
  // line into the command buffer's write data
  input  logic       rd_valid,
  input  line_t      rd_head,
  output logic       rd_pop,
  output line_t      in_head_data,
  // software side
  input  mmio_req_t  mmio_req,
  output mmio_rsp_t  mmio_rsp
);
  localparam int unsigned ICW = $clog2(IN_DEPTH+1);
  localparam int unsigned OCW = $clog2(OUT_DEPTH+1);

  mem_req_t         in_head;
  logic [ICW-1:0]   in_count;
  logic [OCW-1:0]   out_count;
  logic             out_full, out_empty;
  logic             in_pop, out_push;
  mem_resp_t        staged, out_din;
  logic             push_rd;
  logic [11:0]      off;
  logic             wr, rd;

  assign off = mmio_req.addr[11:0];
  assign wr  = mmio_req.valid &&  mmio_req.write;
  assign rd  = mmio_req.valid && !mmio_req.write;

  assign in_pop   = wr && (off == RB_IN_POP) && !in_empty;
  assign push_rd  = wr && (off == RB_OUT_PUSH_RD) && rd_valid && !out_full;
  assign out_push = (wr && (off == RB_OUT_PUSH) && !out_full) || push_rd;
  assign rd_pop   = push_rd;
  always_comb begin
    out_din = staged;
    if (push_rd) out_din.data = rd_head;
  end
  assign in_head_data = in_head.data;

  sync_fifo #(.T(mem_req_t), .DEPTH(IN_DEPTH)) u_in_fifo (
    .clk, .rst_n,
    .push(in_push), .din(in_din), .full(in_full),
    .pop(in_pop), .dout(in_head), .empty(in_empty), .count(in_count)
  );

  sync_fifo #(.T(mem_resp_t), .DEPTH(OUT_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .push(out_push), .din(out_din), .full(out_full),
    .pop(out_pop), .dout(out_head), .empty(out_empty), .count(out_count)
  );

  assign out_valid = !out_empty;

  // response staging registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      staged <= '0;
    end else if (wr) begin
      if (off == RB_OUT_INFO) begin
        staged.write  <= mmio_req.wdata[0];
        staged.source <= mmio_req.wdata[8 +: SRC_BITS];
      end
      if (off == RB_OUT_TAG) staged.tag <= mmio_req.wdata;
      for (int w = 0; w < WORDS_PER_LINE; w++)
        if (off == RB_OUT_DATA + 12'(8*w)) staged.data[w*WORD_BITS +: WORD_BITS] <= mmio_req.wdata;
    end
  end

  // register reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mmio_rsp <= '0;
    end else begin
      mmio_rsp.valid <= rd;
      mmio_rsp.rdata <= '0;
      if (rd) begin
        unique case (off)
          RB_IN_STATUS:  mmio_rsp.rdata <= word_t'({in_count, 7'b0, !in_empty});
          RB_IN_ADDR:    mmio_rsp.rdata <= word_t'(in_head.addr);
          RB_IN_INFO:    mmio_rsp.rdata <= word_t'({in_head.source, 7'b0, in_head.write});
          RB_IN_TAG:     mmio_rsp.rdata <= in_head.tag;
          RB_OUT_STATUS: mmio_rsp.rdata <= word_t'({out_count, 7'b0, out_full});
          default: begin
            for (int w = 0; w < WORDS_PER_LINE; w++)
              if (off == RB_IN_DATA + 12'(8*w)) mmio_rsp.rdata <= in_head.data[w*WORD_BITS +: WORD_BITS];
          end
        endcase
      end
    end
  end
endmodule

// command_buffer: accumulates the DRAM commands of one batch, each with the
// delay to the next command, plus the write data its WR commands need.
//
// The software memory controller pushes one packed bender_cmd_t per write to
// CB_CMD and, for every WR command, one cache line of write data (eight
// CB_WDATA words, then CB_WDATA_PUSH). Nothing leaves the buffer until DRAM
// Bender runs the batch: it takes commands from cmd_head/cmd_pop and, for each
// WR, the next line from wdata_head/wdata_pop. CB_STATUS reports how many
// commands and lines are held. Offload: a write to CB_WDATA_REQ pushes the
// Incoming Req FIFO head's line (req_line) as the next write line in one
// cycle instead of eight word writes. Pushes into a full queue are dropped. The
// buffer's role (accumulate commands and their delays for one
// timing-preserving batch) follows the paper; the entry format, the separate
// write data queue and the depths (256 commands, 16 lines) are this design's
// choices.
module command_buffer
  import easydram_pkg::*;
#(
  parameter int unsigned CMD_DEPTH   = 256,
  parameter int unsigned WDATA_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // software side
  input  mmio_req_t   mmio_req,
  output mmio_rsp_t   mmio_rsp,
  // DRAM Bender side
  output logic        cmd_valid,
  output bender_cmd_t cmd_head,
  input  logic        cmd_pop,
  output logic        wdata_valid,
  output line_t       wdata_head,
  input  logic        wdata_pop,
  // head line of the Incoming Req FIFO (write requests)
  input  line_t       req_line
);
  localparam int unsigned CCW = $clog2(CMD_DEPTH+1);
  localparam int unsigned WCW = $clog2(WDATA_DEPTH+1);

  logic [11:0]    off;
  logic           wr, rd;
  logic           cmd_full, cmd_empty, wd_full, wd_empty;
  logic [CCW-1:0] cmd_count;
  logic [WCW-1:0] wd_count;
  line_t          wd_stage;
  bender_cmd_t    cmd_in;

  assign off    = mmio_req.addr[11:0];
  assign wr     = mmio_req.valid &&  mmio_req.write;
  assign rd     = mmio_req.valid && !mmio_req.write;
  assign cmd_in = bender_cmd_t'(mmio_req.wdata[BENDER_CMD_BITS-1:0]);

  sync_fifo #(.T(bender_cmd_t), .DEPTH(CMD_DEPTH)) u_cmd_fifo (
    .clk, .rst_n,
    .push(wr && off == CB_CMD && !cmd_full), .din(cmd_in), .full(cmd_full),
    .pop(cmd_pop), .dout(cmd_head), .empty(cmd_empty), .count(cmd_count)
  );

  sync_fifo #(.T(line_t), .DEPTH(WDATA_DEPTH)) u_wdata_fifo (
    .clk, .rst_n,
    .push(wr && (off == CB_WDATA_PUSH || off == CB_WDATA_REQ) && !wd_full),
    .din(off == CB_WDATA_REQ ? req_line : wd_stage), .full(wd_full),
    .pop(wdata_pop), .dout(wdata_head), .empty(wd_empty), .count(wd_count)
  );

  assign cmd_valid   = !cmd_empty;
  assign wdata_valid = !wd_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wd_stage <= '0;
    end else if (wr) begin
      for (int w = 0; w < WORDS_PER_LINE; w++)
        if (off == CB_WDATA + 12'(8*w)) wd_stage[w*WORD_BITS +: WORD_BITS] <= mmio_req.wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mmio_rsp <= '0;
    end else begin
      mmio_rsp.valid <= rd;
      mmio_rsp.rdata <= '0;
      if (rd && off == CB_STATUS)
        mmio_rsp.rdata <= word_t'({16'(wd_count), 16'(cmd_count)});
    end
  end
endmodule

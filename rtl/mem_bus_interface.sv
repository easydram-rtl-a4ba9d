// mem_bus_interface: the tile's port on the memory bus below the last-level
// cache.
//
// The bus has a request channel (a_*) and a response channel (d_*), each
// with valid/ready handshakes and 64-bit beats. A read request is one beat
// carrying the line address and a source id. A write request is eight beats,
// each repeating address, source and write flag, together carrying one 64-byte
// line, low word first. The interface assembles a request into one mem_req_t
// and offers it to the tile control logic (req_valid/req_ready); a_ready is
// low while an assembled request waits, which is how a full Incoming Req FIFO
// back-pressures the bus. In the other direction it takes one released
// mem_resp_t (resp_valid/resp_ready) and sends it as eight data beats for a
// read or a single acknowledge beat for a write.
//
// The bus belongs to the emulated processors' clock domain, which is gated
// by time scaling; a beat moves only in a cycle with bus_en high (the
// processors' clock enable), so a gated processor neither sends nor sees one.
//
// Timing: the cycle after the last request beat req_valid rises; a response
// accepted in cycle t shows its first beat in cycle t+1. The paper names the
// memory bus interface only (the real one is the Chipyard system bus); the
// channel format and beat layout here are this design's choices.
//
// Lint reports rst_n as both synchronous and asynchronous: the synchronous use
// is only the disable iff of the assertions below; all flops reset asynchronously.
module mem_bus_interface
  import easydram_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  bus_en,     // processor-side clock enable
  // request channel from the last-level cache
  input  logic                  a_valid,
  output logic                  a_ready,
  input  logic                  a_write,
  input  logic [PADDR_BITS-1:0] a_addr,
  input  logic [SRC_BITS-1:0]   a_source,
  input  logic [BEAT_BITS-1:0]  a_data,
  // response channel to the last-level cache
  output logic                  d_valid,
  input  logic                  d_ready,
  output logic                  d_write,
  output logic [SRC_BITS-1:0]   d_source,
  output logic [BEAT_BITS-1:0]  d_data,
  // tile side
  output logic                  req_valid,
  input  logic                  req_ready,
  output mem_req_t              req,
  input  logic                  resp_valid,
  output logic                  resp_ready,
  input  mem_resp_t             resp
);
  localparam int unsigned BW = $clog2(BEATS_PER_LINE);

  logic [BW-1:0] a_beat, d_beat;
  logic          a_fire, d_fire, d_busy;
  mem_resp_t     d_line;

  // ---------------------------------------------------------------- requests
  assign a_ready = !req_valid;
  assign a_fire  = a_valid && a_ready && bus_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_valid <= 1'b0;
      req       <= '0;
      a_beat    <= '0;
    end else begin
      if (req_valid && req_ready) req_valid <= 1'b0;
      if (a_fire) begin
        req.tag    <= '0;     // stamped by the tile control logic
        req.addr   <= a_addr;
        req.source <= a_source;
        req.write  <= a_write;
        req.data[a_beat*BEAT_BITS +: BEAT_BITS] <= a_write ? a_data : '0;
        if (!a_write || a_beat == BW'(BEATS_PER_LINE-1)) begin
          req_valid <= 1'b1;
          a_beat    <= '0;
        end else begin
          a_beat    <= a_beat + 1'b1;
        end
      end
    end
  end

  // ---------------------------------------------------------------- responses
  assign resp_ready = !d_busy;
  assign d_valid    = d_busy;
  assign d_write    = d_line.write;
  assign d_source   = d_line.source;
  assign d_data     = d_line.write ? '0 : d_line.data[d_beat*BEAT_BITS +: BEAT_BITS];
  assign d_fire     = d_valid && d_ready && bus_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_busy <= 1'b0;
      d_beat <= '0;
      d_line <= '0;
    end else begin
      if (!d_busy && resp_valid) begin
        d_busy <= 1'b1;
        d_beat <= '0;
        d_line <= resp;
      end else if (d_fire) begin
        if (d_line.write || d_beat == BW'(BEATS_PER_LINE-1)) begin
          d_busy <= 1'b0;
          d_beat <= '0;
        end else begin
          d_beat <= d_beat + 1'b1;
        end
      end
    end
  end

  // bus rules: a pending beat or response is held until it is taken
  a_a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             a_valid && !(a_ready && bus_en) |=> a_valid && $stable(a_addr));
  a_d_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             d_valid && !(d_ready && bus_en) |=> d_valid && $stable(d_data));
endmodule

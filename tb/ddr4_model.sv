// ddr4_model: behavioural stand-in for one DDR4 rank behind the PHY, for
// simulation only (not synthesizable, not part of the design).
//
// It decodes the command port of the tile one command per cycle: ACT opens a
// row, RD returns the addressed 64-byte line RL cycles later, WR stores a
// line, PRE closes the bank. Lines never written read as a fixed pattern of
// their address. Two behaviours of real chips that the design's case studies
// rely on are modelled: an ACT that follows a PRE within RC_GAP cycles of
// another ACT to a row of the same subarray (512 rows) copies the first row
// into the second (in-DRAM RowClone), and a RD issued earlier than the row's
// minimum tRCD after its ACT returns corrupted data. A row needs TRCD_WEAK
// cycles if it is weak (is_weak), TRCD_STRONG otherwise. Illegal sequences
// (RD/WR to a closed bank, ACT to an open bank) are counted in n_err.
module ddr4_model
  import easydram_pkg::*;
#(
  parameter int RL          = 8,
  parameter int TRCD_WEAK   = 9,
  parameter int TRCD_STRONG = 6,
  parameter int RC_GAP      = 3
) (
  input  logic                 clk,
  input  logic                 cmd_valid,
  input  ddr_cmd_e             cmd,
  input  logic [BANK_BITS-1:0] bank,
  input  logic [ROW_BITS-1:0]  row,
  input  logic [COL_BITS-1:0]  col,
  input  line_t                wdata,
  output logic                 rdata_valid,
  output line_t                rdata
);
  typedef logic [BANK_BITS+ROW_BITS+7-1:0] key_t;

  line_t           mem [key_t];
  bit              open_b [16];
  logic [14:0]     orow [16], last_row [16];
  bit              last_valid [16];
  longint unsigned act_t [16], pre_t [16], prev_act_t [16];
  longint unsigned cyc = 0;
  int n_act = 0, n_pre = 0, n_rd = 0, n_wr = 0, n_clone = 0, n_err = 0, n_corrupt = 0;

  typedef struct { longint unsigned due; line_t d; } rd_t;
  rd_t rq[$];

  function automatic bit is_weak(input int b, input int r);
    return ((r * 7 + b * 3) % 11) == 0;
  endfunction

  function automatic line_t pattern(input int b, input int r, input int c);
    return {16{16'(r), 4'(b), 12'(c)}};
  endfunction

  function automatic line_t peek(input int b, input int r, input int c);
    key_t k;
    k = {4'(b), 15'(r), 7'(c)};
    return mem.exists(k) ? mem[k] : pattern(b, r, c);
  endfunction

  task automatic poke(input int b, input int r, input int c, input line_t d);
    mem[{4'(b), 15'(r), 7'(c)}] = d;
  endtask

  initial begin
    for (int b = 0; b < 16; b++) begin
      open_b[b] = 0; last_valid[b] = 0; orow[b] = 0; last_row[b] = 0;
      act_t[b] = 0; pre_t[b] = 0; prev_act_t[b] = 0;
    end
    rdata_valid = 0;
    rdata = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rdata_valid <= 1'b0;
    if (rq.size() > 0 && rq[0].due <= cyc) begin
      rdata_valid <= 1'b1;
      rdata       <= rq[0].d;
      void'(rq.pop_front());
    end
    if (cmd_valid) begin
      int b;
      b = int'(bank);
      unique case (cmd)
        DDR_ACT: begin
          n_act++;
          if (open_b[b]) begin n_err++; $display("ddr4_model: ACT to open bank %0d at cycle %0d", b, cyc); end
          if (last_valid[b] && cyc - pre_t[b] <= RC_GAP && pre_t[b] - prev_act_t[b] <= RC_GAP &&
              last_row[b][14:9] == row[14:9] && last_row[b] != row) begin
            n_clone++;
            for (int c = 0; c < 128; c++) poke(b, int'(row), c, peek(b, int'(last_row[b]), c));
          end
          open_b[b] = 1; orow[b] = row; act_t[b] = cyc;
        end
        DDR_PRE: begin
          n_pre++;
          if (open_b[b]) begin
            last_valid[b] = 1; last_row[b] = orow[b]; prev_act_t[b] = act_t[b];
          end else begin
            last_valid[b] = 0;
          end
          open_b[b] = 0; pre_t[b] = cyc;
        end
        DDR_PREA: begin
          for (int i = 0; i < 16; i++) begin open_b[i] = 0; last_valid[i] = 0; end
        end
        DDR_RD: begin
          rd_t e;
          n_rd++;
          if (!open_b[b]) begin n_err++; $display("ddr4_model: RD to closed bank %0d at cycle %0d", b, cyc); end
          e.due = cyc + RL - 1;
          e.d   = peek(b, int'(orow[b]), int'(col[9:3]));
          if (cyc - act_t[b] < longint'(is_weak(b, int'(orow[b])) ? TRCD_WEAK : TRCD_STRONG)) begin
            n_corrupt++;
            e.d[0] = ~e.d[0];
          end
          rq.push_back(e);
        end
        DDR_WR: begin
          n_wr++;
          if (!open_b[b]) begin n_err++; $display("ddr4_model: WR to closed bank %0d at cycle %0d", b, cyc); end
          else poke(b, int'(orow[b]), int'(col[9:3]), wdata);
        end
        default: ;
      endcase
    end
  end
endmodule

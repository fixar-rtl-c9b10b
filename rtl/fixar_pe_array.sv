// fixar_pe_array: the ROWS x COLS grid of configurable PEs of one AAP core.
//
// Activation act_row[r] is broadcast to all PEs of row r; partial sums flow
// down each column (PE(r,c) adds to the registered sum of PE(r-1,c); row 0
// starts from zero), so psum_out[c] is the column sum ROWS cycles after row
// 0 received its activation. Weights are pre-loaded one 512-bit word per
// cycle, in one of the two orientations the paper uses:
//   ld_col = 1: word element r goes to PE(r, ld_idx)   (one matrix row -> a PE column)
//   ld_col = 0: word element c goes to PE(ld_idx, c)   (one matrix row -> a PE row)
// ld_all (with ld_col = 0) writes the word into every row at once; the
// gradient pass uses it. Loading and computing may overlap only if the
// caller keeps the weights of rows still in flight unchanged.
module fixar_pe_array
  import fixar_pkg::*;
#(
  parameter int unsigned ROWS = ARR,
  parameter int unsigned COLS = ARR
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  half,
  input  logic                  ld_en,
  input  logic                  ld_col,
  input  logic                  ld_all,
  input  logic [3:0]            ld_idx,
  input  logic [ARR-1:0][31:0]  ld_word,
  input  logic [ROWS-1:0][31:0] act_row,
  output logic [COLS-1:0][31:0] psum_out
);
  logic [ROWS:0][COLS-1:0][31:0] ps;
  assign ps[0] = '0;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic        ld;
      logic [31:0] w;
      always_comb begin
        if (ld_col) begin
          ld = ld_en && (ld_idx == 4'(c));
          w  = ld_word[r % ARR];
        end else begin
          ld = ld_en && (ld_all || (ld_idx == 4'(r)));
          w  = ld_word[c % ARR];
        end
      end
      fixar_pe u_pe (
        .clk, .rst_n, .half,
        .ld_en  (ld),
        .w_in   (w),
        .a_in   (act_row[r]),
        .psum_in(ps[r][c]),
        .y      (ps[r+1][c])
      );
    end
  end

  assign psum_out = ps[ROWS];
endmodule

// fixar_accumulator: the accumulator at the bottom of an AAP core.
//
// One register per PE column. clr zeroes all of them; en adds the column
// sums leaving the array (psum_in) into them, so a matrix-vector product is
// built tile by tile over the input dimension. In full precision each
// register is one 32-bit Q16.16 sum; in half precision its two 16-bit halves
// are separate sums of two activation vectors, each wrapping on its own
// (no carry from bit 15 into bit 16). clr and en in the same cycle load
// psum_in. The paper only names this block; its width and the
// non-saturating addition are this design's choices.
module fixar_accumulator
  import fixar_pkg::*;
#(
  parameter int unsigned COLS = ARR
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  half,
  input  logic                  clr,
  input  logic                  en,
  input  logic [COLS-1:0][31:0] psum_in,
  output logic [COLS-1:0][31:0] acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (clr || en) begin
      for (int c = 0; c < COLS; c++) begin
        logic [31:0] base;
        base = clr ? 32'd0 : acc[c];
        if (!en)       acc[c] <= 32'd0;
        else if (half) acc[c] <= {base[31:16] + psum_in[c][31:16], base[15:0] + psum_in[c][15:0]};
        else           acc[c] <= base + psum_in[c];
      end
    end
  end
endmodule

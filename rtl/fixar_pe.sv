// fixar_pe: processing element with the configurable fixed-point datapath.
//
// The PE holds one pre-loaded 32-bit weight W and, each cycle, adds W times
// its row's activation A to the partial sum PSUM arriving from the PE above,
// registering the result Y (one cycle latency). The product is built from two
// 32x16 multipliers, as in the paper: the upper one multiplies W by A[31:16],
// the lower one W by A[15:0].
//   full precision (half = 0): A is one Q16.16 value. The lower half of A is
//     unsigned, the upper product is shifted left by 16 and added to the lower
//     one, giving the 64-bit W*A; its Q16.16 part [47:16] is added to PSUM.
//   half precision (half = 1): A holds two signed 16-bit activations. Each
//     product is shifted right by 16 (W is Q16.16), keeping the activation's
//     own format, and added to its own 16-bit half of PSUM:
//     Y[31:16] = PSUM[31:16] + (W*A[31:16])>>16, Y[15:0] likewise.
// The two-multiplier split, the shift and the two separate partial sums are
// the paper's; the Q16.16 format, the signedness handling of the lower
// multiplier and wrap-around (non-saturating) addition are this design's.
// Weight load: ld_en writes w_in into the weight register.
module fixar_pe
  import fixar_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        half,      // 1: two 16-bit activations per slot
  input  logic        ld_en,
  input  logic [31:0] w_in,
  input  logic [31:0] a_in,
  input  logic [31:0] psum_in,
  output logic [31:0] y
);
  logic signed [31:0] w_q;
  logic signed [47:0] p_hi, p_lo;
  logic signed [16:0] a_lo_ext;
  logic signed [63:0] full_prod;
  logic        [31:0] y_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     w_q <= '0;
    else if (ld_en) w_q <= w_in;
  end

  // Lower activation half: unsigned in full precision, signed in half precision.
  assign a_lo_ext = {half & a_in[15], a_in[15:0]};
  assign p_hi = w_q * $signed(a_in[31:16]);
  assign p_lo = 48'(w_q * a_lo_ext);
  assign full_prod = (64'(p_hi) <<< 16) + 64'(p_lo);

  always_comb begin
    if (half) begin
      y_d[31:16] = psum_in[31:16] + p_hi[31:16];
      y_d[15:0]  = psum_in[15:0]  + p_lo[31:16];
    end else begin
      y_d = psum_in + full_prod[47:16];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y <= '0;
    else        y <= y_d;
  end
endmodule

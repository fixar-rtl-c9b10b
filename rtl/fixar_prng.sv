// fixar_prng: pseudo random number generator for exploration noise.
//
// LANES independent 32-bit xorshift generators (x ^= x<<13; x ^= x>>17;
// x ^= x<<5), one per element of a 512-bit word, each seeded differently
// at reset. Every cycle with en high all lanes step once; rnd shows the
// current states. The paper only says that a PRNG adds random noise to the
// actor's outputs; the xorshift generator, the uniform distribution and the
// seeds are this design's choices.
module fixar_prng
  import fixar_pkg::*;
#(
  parameter int unsigned LANES = ARR,
  parameter logic [31:0] SEED  = 32'h2545_f491
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  output logic [LANES-1:0][31:0] rnd
);
  function automatic logic [31:0] xs(input logic [31:0] x);
    logic [31:0] t;
    t = x ^ (x << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LANES; i++) rnd[i] <= SEED ^ (32'h9e37_79b9 * 32'(i + 1));
    end else if (en) begin
      for (int i = 0; i < LANES; i++) rnd[i] <= xs(rnd[i]);
    end
  end
endmodule

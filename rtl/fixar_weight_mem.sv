// fixar_weight_mem: the shared 512-bit-wide weight memory (1.05 MB).
//
// DEPTH words of 16 Q16.16 weights, one synchronous read port (data one
// cycle after the address) and one write port (host initialisation and Adam
// write-back). Layer matrices are stored one matrix row per run of
// ceil(columns/16) words, each row starting on a word boundary with zero
// padding. The paper spreads the word over 16 BRAM modules; here it is one
// array. 16384 x 64 B = 1,048,576 B is the paper's 1.05 MB.
module fixar_weight_mem
  import fixar_pkg::*;
#(
  parameter int unsigned DEPTH = WMEM_DEPTH,
  parameter int unsigned AW    = WADDR_W
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output word_t         rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata
);
  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

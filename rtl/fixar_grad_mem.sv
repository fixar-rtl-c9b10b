// fixar_grad_mem: the gradient memory (1.05 MB, same shape as the weights).
//
// Word k holds the gradients of weight word k. Besides a plain write
// (we, used to clear a word after the weight update), it has an accumulate
// write (acc): the 16 Q16.16 lanes of wdata are added lane by lane to the
// stored word, so the gradients of all vectors of a batch add up in place.
// One synchronous read port. If acc and we hit the same cycle, acc wins.
// Reset marks every word as zero (one valid bit per word), so the first
// accumulation into a word after reset writes the data as it is.
// The paper gives the size and that gradients accumulate here; the
// read-modify-write port is this design's.
module fixar_grad_mem
  import fixar_pkg::*;
#(
  parameter int unsigned DEPTH = WMEM_DEPTH,
  parameter int unsigned AW    = WADDR_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output word_t         rdata,
  input  logic          we,
  input  logic          acc,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata
);
  word_t mem [DEPTH];
  logic [DEPTH-1:0] ok;    // word holds data; otherwise it reads as zero

  always_ff @(posedge clk) begin
    if (acc) begin
      for (int i = 0; i < ARR; i++) mem[waddr][i] <= (ok[waddr] ? mem[waddr][i] : 32'd0) + wdata[i];
    end else if (we) begin
      mem[waddr] <= wdata;
    end
    if (re) rdata <= ok[raddr] ? mem[raddr] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         ok <= '0;
    else if (acc || we) ok[waddr] <= 1'b1;
  end
endmodule

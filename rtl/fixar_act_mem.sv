// fixar_act_mem: activation memory of one AAP core (2.94 KB).
//
// DEPTH words of 512 bits, one synchronous read port (data one cycle after
// the address) and one write port. With the default 47 words it holds one
// critic vector of the largest benchmark with every layer padded to whole
// 16-element words: 2 (input 17+6) + 25 (400) + 19 (300) + 1 (output) = 47
// words = 3008 bytes, the paper's 2.94 KB. Size is the paper's; the port
// arrangement is this design's.
module fixar_act_mem
  import fixar_pkg::*;
#(
  parameter int unsigned DEPTH = ACT_DEPTH,
  parameter int unsigned AW    = AADDR_W
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
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end
endmodule

// fixar_quantizer: activation range monitor and 32-to-16-bit quantizer for
// quantization-aware training.
//
// Before the quantization delay (frozen = 0) every word presented with
// mon_en updates the running minimum and maximum of the Q16.16 activations
// (A_min, A_max). A freeze pulse ends the monitoring: the range
// R = |A_min| + |A_max| sets the quantization step delta = 2^s LSB of Q16.16,
// with s the smallest value for which R >> s fits in 15 bits (so every
// activation fits a signed 16-bit number), limited to 0..16. frozen then
// stays high. The activation unit then quantizes every activation as
// floor(A / delta) = A >>> s, saturated to 16 bits (fixar_pkg::narrow); the
// 16-bit value has F = 16 - s fractional bits. freeze takes effect at the
// next edge.
// Following the paper: monitoring before the delay, delta from |A_min| +
// |A_max|, floor(A/delta). This design's choices: delta is a power of two,
// so the division is a shift, and the zero point z is left out (the 16-bit
// value is signed and centred on zero), so the PE can multiply it directly.
module fixar_quantizer
  import fixar_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       mon_en,
  input  word_t      in_word,
  input  logic       freeze,
  output logic       frozen,
  output fx_t        a_min,
  output fx_t        a_max,
  output logic [4:0] s
);
  fx_t         wmin, wmax;
  logic [32:0] range;
  logic [5:0]  blen;

  always_comb begin
    wmin = a_min;
    wmax = a_max;
    for (int i = 0; i < ARR; i++) begin
      if (fx_t'(in_word[i]) < wmin) wmin = fx_t'(in_word[i]);
      if (fx_t'(in_word[i]) > wmax) wmax = fx_t'(in_word[i]);
    end
  end

  always_comb begin
    range = 33'(a_min[31] ? -a_min : a_min) + 33'(a_max[31] ? -a_max : a_max);
    blen  = '0;
    for (int b = 0; b < 33; b++) if (range[b]) blen = 6'(b + 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_min  <= 32'sh7fff_ffff;
      a_max  <= -32'sh7fff_ffff - 1;
      frozen <= 1'b0;
      s      <= '0;
    end else if (!frozen) begin
      if (freeze) begin
        frozen <= 1'b1;
        s      <= (blen <= 6'd15) ? 5'd0 : (blen >= 6'd31) ? 5'd16 : 5'(blen - 6'd15);
      end else if (mon_en) begin
        a_min <= wmin;
        a_max <= wmax;
      end
    end
  end
endmodule

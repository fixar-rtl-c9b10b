// fixar_act_unit: activation unit applied to the accumulated outputs.
//
// Combinational, one 512-bit word (16 slots) per cycle. Functions (afn):
//   AF_NONE       y = x
//   AF_RELU       y = max(x, 0)
//   AF_TANH       y = tanh(x), piecewise-linear approximation below
//   AF_RELU_GRAD  y = x if the stored forward activation (mask) > 0, else 0;
//                 the derivative of ReLU used in back-propagation
// Before the function, noise_en adds the Q16.16 noise word (exploration
// noise for the actor's output). In full precision (half = 0) each slot is
// one Q16.16 value. In half precision each 16-bit half of a slot is widened
// to Q16.16 by the quantizer's shift s, processed, and narrowed back with
// saturation. ReLU for hidden layers and tanh on the actor output are the
// paper's; the tanh approximation (eight chords, error below 0.03) is this
// design's.
module fixar_act_unit
  import fixar_pkg::*;
(
  input  logic       half,
  input  logic [4:0] s,
  input  afn_e       afn,
  input  logic       noise_en,
  input  word_t      noise,
  input  word_t      x,
  input  word_t      mask,
  output word_t      y
);
  // tanh on |x| by chords between the breakpoints 0, 1/4, 1/2, 3/4, 1,
  // 3/2, 2 and 3 (Q16.16: start, tanh(start), slope); constant 0.99505 beyond 3.
  function automatic fx_t tanh_pla(input fx_t v);
    fx_t a, x0, y0, sl;
    logic signed [63:0] r;
    a = (v < 0) ? -v : v;
    if (v == 32'sh8000_0000) a = 32'sh7fff_ffff;
    if      (a < 32'sh0000_4000) begin x0 = 32'sh0000_0000; y0 = 32'sd0;     sl = 32'sd64204; end
    else if (a < 32'sh0000_8000) begin x0 = 32'sh0000_4000; y0 = 32'sd16051; sl = 32'sd56937; end
    else if (a < 32'sh0000_c000) begin x0 = 32'sh0000_8000; y0 = 32'sd30285; sl = 32'sd45359; end
    else if (a < 32'sh0001_0000) begin x0 = 32'sh0000_c000; y0 = 32'sd41625; sl = 32'sd33147; end
    else if (a < 32'sh0001_8000) begin x0 = 32'sh0001_0000; y0 = 32'sd49912; sl = 32'sd18816; end
    else if (a < 32'sh0002_0000) begin x0 = 32'sh0001_8000; y0 = 32'sd59320; sl = 32'sd7717;  end
    else if (a < 32'sh0003_0000) begin x0 = 32'sh0002_0000; y0 = 32'sd63179; sl = 32'sd2033;  end
    else                         begin x0 = 32'sh0003_0000; y0 = 32'sd65212; sl = 32'sd0;     end
    r = 64'(y0) + ((64'(a - x0) * 64'(sl)) >>> 16);
    return (v < 0) ? -fx_t'(r) : fx_t'(r);
  endfunction

  function automatic fx_t apply(input afn_e f, input fx_t v, input fx_t m);
    case (f)
      AF_RELU:      return (v > 0) ? v : '0;
      AF_TANH:      return tanh_pla(v);
      AF_RELU_GRAD: return (m > 0) ? v : '0;
      default:      return v;
    endcase
  endfunction

  always_comb begin
    for (int i = 0; i < ARR; i++) begin
      fx_t nz;
      nz = noise_en ? fx_t'(noise[i]) : '0;
      if (half) begin
        y[i][31:16] = narrow(apply(afn, widen(hx_t'(x[i][31:16]), s) + nz,
                                   widen(hx_t'(mask[i][31:16]), s)), s);
        y[i][15:0]  = narrow(apply(afn, widen(hx_t'(x[i][15:0]), s) + nz,
                                   widen(hx_t'(mask[i][15:0]), s)), s);
      end else begin
        y[i] = apply(afn, fx_t'(x[i]) + nz, fx_t'(mask[i]));
      end
    end
  end
endmodule

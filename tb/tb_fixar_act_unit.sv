// tb_fixar_act_unit: random words through every function in both precisions.
// ReLU, identity and the ReLU-derivative mask are compared exactly; tanh is
// compared with the real-valued tanh (error below 0.03) and must be odd.
// Noise addition and the half-precision widen / narrow path (shift s) are
// modelled independently in the testbench.
module tb_fixar_act_unit;
  import fixar_pkg::*;
  logic half, noise_en;
  logic [4:0] s;
  afn_e afn;
  word_t noise, x, mask, y;
  int checks = 0, failures = 0;

  fixar_act_unit dut (.*);

  function automatic longint relu_ref(input longint v);
    return (v > 0) ? v : 0;
  endfunction

  // reference for one value in Q16.16 (as a real number for tanh)
  task automatic check_val(input string tag, input longint v, input longint m, input longint got);
    longint exp;
    real r, t;
    checks++;
    case (afn)
      AF_NONE:      exp = v;
      AF_RELU:      exp = relu_ref(v);
      AF_RELU_GRAD: exp = (m > 0) ? v : 0;
      default:      exp = 0;
    endcase
    if (afn == AF_TANH) begin
      r = real'(v) / 65536.0;
      t = $tanh(r);
      if ((real'(got) / 65536.0 - t) > 0.03 || (t - real'(got) / 65536.0) > 0.03) begin
        failures++;
        if (failures < 10) $display("FAIL %s tanh(%f) got %f", tag, r, real'(got) / 65536.0);
      end
    end else if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s afn=%0d v=%0d got=%0d exp=%0d", tag, afn, v, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 2000; n++) begin
      afn = afn_e'(n % 4);
      half = (n / 4) % 2;
      s = 5'($urandom_range(0, 8));
      noise_en = (n % 16) >= 8;
      for (int i = 0; i < ARR; i++) begin
        logic [31:0] v;
        v = $urandom;
        x[i] = (n % 3 == 0) ? v : {{13{v[18]}}, v[18:0]};   // mostly |x| < 4
        mask[i] = $urandom;
        noise[i] = {{24{v[7]}}, v[7:0]};
      end
      #1;
      for (int i = 0; i < ARR; i++) begin
        if (!half) begin
          longint v;
          v = longint'($signed(x[i])) + (noise_en ? longint'($signed(noise[i])) : 0);
          v = longint'(int'(v));                         // 32-bit wrap
          if (afn == AF_TANH && (v > 32'sh0100_0000 || v < -32'sh0100_0000)) continue;
          check_val("full", v, longint'($signed(mask[i])), longint'($signed(y[i])));
        end else begin
          for (int h = 0; h < 2; h++) begin
            longint v, m, g, e;
            logic [15:0] xs, ms, ys;
            xs = h ? x[i][31:16] : x[i][15:0];
            ms = h ? mask[i][31:16] : mask[i][15:0];
            ys = h ? y[i][31:16] : y[i][15:0];
            v = (longint'($signed(xs)) << s) + (noise_en ? longint'($signed(noise[i])) : 0);
            m = longint'($signed(ms)) << s;
            g = longint'($signed(ys)) << s;
            if (afn == AF_TANH) begin
              // result is re-quantized by s: allow one step of the 16-bit grid
              real t, r;
              r = real'(v) / 65536.0;
              t = $tanh(r);
              checks++;
              if ((real'(g) / 65536.0 - t) > 0.03 + real'(1 << s) / 65536.0 ||
                  (t - real'(g) / 65536.0) > 0.03 + real'(1 << s) / 65536.0) begin
                failures++;
                if (failures < 10) $display("FAIL half tanh(%f) got %f", r, real'(g) / 65536.0);
              end
            end else begin
              case (afn)
                AF_NONE: e = v;
                AF_RELU: e = relu_ref(v);
                default: e = (m > 0) ? v : 0;
              endcase
              e = e >>> s;
              if (e > 32767) e = 32767;
              if (e < -32768) e = -32768;
              checks++;
              if (longint'($signed(ys)) != e) begin
                failures++;
                if (failures < 10) $display("FAIL half afn=%0d s=%0d x=%h got=%h exp=%0d", afn, s, xs, ys, e);
              end
            end
          end
        end
      end
    end
    // tanh is odd and saturates near 1
    afn = AF_TANH; half = 0; noise_en = 0;
    for (int i = 0; i < ARR; i++) x[i] = 32'(i * 40000);
    #1;
    for (int i = 0; i < ARR; i++) begin
      word_t yp;
      yp[i] = y[i];
      x[i] = -x[i];
      #1;
      checks++;
      if ($signed(y[i]) != -$signed(yp[i])) failures++;
      x[i] = -x[i];
      #1;
    end
    x[0] = 32'sh0010_0000;  // 16.0
    #1;
    checks++;
    if (y[0] != 32'd65212) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fixar_adam: runs several Adam steps on a few weight words and compares
// each updated weight with a real-valued Adam model (beta1 = 0.9,
// beta2 = 0.999, eps = 2^-24, no bias correction) that keeps its own m and
// v. Gradients are drawn with 0.25 <= |g| < 2, where the fixed-point
// second moment is well resolved. A result passes within 3% of the step
// plus 6 LSB. The cycles from
// start to done must lie between 16*80 and 16*95 per word.
module tb_fixar_adam;
  import fixar_pkg::*;
  logic clk = 0, rst_n = 0, start, busy, done;
  logic [WADDR_W-1:0] addr;
  logic [23:0] lr;
  word_t w_in, g_in, w_out;
  int checks = 0, failures = 0;
  real m_r [4][ARR], v_r [4][ARR], w_r [4][ARR];

  fixar_adam dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int addrs [4] = '{0, 7, 300, 16383};
    start = 0; addr = 0; lr = 24'd167772;   // 0.01 in Q0.24
    w_in = '0; g_in = '0;
    @(negedge clk); rst_n = 1;
    for (int j = 0; j < 4; j++) begin
      for (int i = 0; i < ARR; i++) begin m_r[j][i] = 0; v_r[j][i] = 0; end
    end
    for (int step = 0; step < 7; step++) begin
      for (int j = 0; j < 4; j++) begin
        int cyc;
        @(negedge clk);
        addr = WADDR_W'(addrs[j]);
        for (int i = 0; i < ARR; i++) begin
          logic [31:0] r;
          r = $urandom;
          w_in[i] = {{12{r[19]}}, r[19:0]};                   // |w| < 8
          g_in[i] = {15'd0, 2'b01, r[31:17]};  // 0.25 <= |g| < 2
          if (r[0]) g_in[i] = -g_in[i];
          w_r[j][i] = real'($signed(w_in[i])) / 65536.0;
        end
        start = 1;
        @(negedge clk); start = 0;
        cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc < ARR * 80 || cyc > ARR * 95) begin
          failures++;
          $display("FAIL cycles %0d", cyc);
        end
        for (int i = 0; i < ARR; i++) begin
          real g, stp, exp, got, tol;
          g = real'($signed(g_in[i])) / 65536.0;
          m_r[j][i] = 0.9 * m_r[j][i] + 0.1 * g;
          v_r[j][i] = 0.999 * v_r[j][i] + 0.001 * g * g;
          stp = 0.01 * m_r[j][i] / ($sqrt(v_r[j][i]) + 1.0 / 16777216.0);
          exp = w_r[j][i] - stp;
          got = real'($signed(w_out[i])) / 65536.0;
          tol = 0.03 * (stp < 0 ? -stp : stp) + 6.0 / 65536.0;
          begin
            checks++;
            if (got - exp > tol || exp - got > tol) begin
              failures++;
              if (failures < 10) $display("FAIL step=%0d a=%0d i=%0d got=%f exp=%f", step, addrs[j], i, got, exp);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

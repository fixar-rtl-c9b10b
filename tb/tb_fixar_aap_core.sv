// tb_fixar_aap_core: one AAP core computing matrix-vector products tile by
// tile. For each test a 16 x (16*T) weight matrix slice and a 16*T vector
// are drawn; each 16x16 tile is pre-loaded (alternating the by-column and
// by-row orientations, with the matrix transposed accordingly), its vector
// word fired, and the accumulator must equal the reference W*x after the
// last tile. Also checks the latency: acc_done exactly ARR + 2 cycles after
// fire. Full and half precision.
module tb_fixar_aap_core;
  import fixar_pkg::*;
  logic clk = 0, rst_n = 0;
  logic half, ld_en, ld_col, ld_all, fire, acc_clr, acc_done;
  logic [3:0] ld_idx;
  logic [ARR-1:0][31:0] ld_word, act_word, acc;
  int checks = 0, failures = 0;

  fixar_aap_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] mac(input logic h, input logic [31:0] ps, w, a);
    longint p, ph, pl;
    if (!h) begin
      p = longint'($signed(w)) * longint'($signed(a));
      return ps + 32'(p >>> 16);
    end
    ph = longint'($signed(w)) * longint'($signed(a[31:16]));
    pl = longint'($signed(w)) * longint'($signed(a[15:0]));
    return {ps[31:16] + 16'(ph >>> 16), ps[15:0] + 16'(pl >>> 16)};
  endfunction

  initial begin
    logic [31:0] M [ARR][ARR];   // M[out][in] for the current tile
    logic [31:0] x [ARR];
    logic [31:0] exp [ARR];
    int lat;
    half = 0; ld_en = 0; ld_col = 0; ld_all = 0; ld_idx = 0; ld_word = '0;
    fire = 0; act_word = '0; acc_clr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 8; n++) begin
      int T;
      T = 1 + n % 3;
      half = n[0];
      @(negedge clk); acc_clr = 1;
      @(negedge clk); acc_clr = 0;
      for (int c = 0; c < ARR; c++) exp[c] = 0;
      for (int t = 0; t < T; t++) begin
        for (int o = 0; o < ARR; o++)
          for (int i = 0; i < ARR; i++) begin
            logic [31:0] v;
            v = $urandom;
            M[o][i] = {{14{v[17]}}, v[17:0]};
          end
        for (int i = 0; i < ARR; i++) x[i] = $urandom;
        for (int o = 0; o < ARR; o++)
          for (int i = 0; i < ARR; i++) exp[o] = mac(half, exp[o], M[o][i], x[i]);
        // pre-load: PE(r,c) must hold M[c][r]
        for (int k = 0; k < ARR; k++) begin
          @(negedge clk);
          ld_en = 1; ld_idx = 4'(k); ld_col = (t % 2 == 0);
          for (int e = 0; e < ARR; e++) ld_word[e] = ld_col ? M[k][e] : M[e][k];
        end
        @(negedge clk);
        ld_en = 0;
        fire = 1;
        for (int i = 0; i < ARR; i++) act_word[i] = x[i];
        @(negedge clk);
        fire = 0;
        lat = 1;
        while (!acc_done) begin @(negedge clk); lat++; end
        checks++;
        if (lat != ARR + 2) begin
          failures++;
          $display("FAIL latency %0d", lat);
        end
      end
      for (int c = 0; c < ARR; c++) begin
        checks++;
        if (acc[c] !== exp[c]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d c=%0d got=%h exp=%h", n, c, acc[c], exp[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

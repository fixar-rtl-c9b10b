// tb_fixar_quantizer: streams random activation words into the monitor,
// keeping its own running minimum and maximum; after freeze, checks the
// recorded range, the shift s (smallest s in 0..16 with (|min|+|max|) >> s
// below 2^15) and that further words no longer change anything. Repeated
// for several value ranges, with a reset between runs.
module tb_fixar_quantizer;
  import fixar_pkg::*;
  logic clk = 0, rst_n = 0, mon_en, freeze, frozen;
  word_t in_word;
  fx_t a_min, a_max;
  logic [4:0] s;
  int checks = 0, failures = 0;

  fixar_quantizer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mon_en = 0; freeze = 0; in_word = '0;
    for (int run = 0; run < 12; run++) begin
      longint mn, mx, rng;
      int bits, exp_s;
      rst_n = 0;
      @(negedge clk); rst_n = 1;
      bits = 4 + run * 2;          // value magnitude up to 2^bits
      mn = 64'sh7fffffff; mx = -64'sh80000000;
      for (int n = 0; n < 50; n++) begin
        @(negedge clk);
        mon_en = (n % 4 != 3);
        for (int i = 0; i < ARR; i++) begin
          longint v;
          v = longint'($urandom_range(0, (1 << (bits > 30 ? 30 : bits)) - 1));
          if ($urandom_range(0, 1) == 1) v = -v;
          if (run == 5) v = v < 0 ? -v : v;                     // all non-negative
          in_word[i] = 32'(v);
          if (mon_en) begin
            if (v < mn) mn = v;
            if (v > mx) mx = v;
          end
        end
      end
      @(negedge clk); mon_en = 0; freeze = 1;
      @(negedge clk); freeze = 0;
      rng = (mn < 0 ? -mn : mn) + (mx < 0 ? -mx : mx);
      exp_s = 16;
      for (int k = 0; k <= 16; k++) if ((rng >> k) < 32768) begin exp_s = k; break; end
      checks += 4;
      if (!frozen) failures++;
      if (a_min != fx_t'(mn)) begin failures++; $display("FAIL min %0d %0d", a_min, mn); end
      if (a_max != fx_t'(mx)) begin failures++; $display("FAIL max %0d %0d", a_max, mx); end
      if (s != 5'(exp_s)) begin failures++; $display("FAIL s=%0d exp=%0d range=%0d", s, exp_s, rng); end
      // frozen: nothing changes any more
      @(negedge clk); mon_en = 1; in_word[0] = 32'h7fff_0000; freeze = 1;
      @(negedge clk); mon_en = 0; freeze = 0;
      checks += 2;
      if (a_max != fx_t'(mx)) failures++;
      if (s != 5'(exp_s)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

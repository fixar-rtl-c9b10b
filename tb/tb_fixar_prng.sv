// tb_fixar_prng: compares every lane with a software xorshift32 model from
// the reset seeds, checks that lanes hold still while en is low and that the
// lanes are different from one another.
module tb_fixar_prng;
  import fixar_pkg::*;
  logic clk = 0, rst_n = 0, en;
  word_t rnd;
  logic [31:0] model [ARR];
  int checks = 0, failures = 0;

  fixar_prng dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0;
    for (int i = 0; i < ARR; i++) model[i] = 32'h2545_f491 ^ (32'h9e37_79b9 * 32'(i + 1));
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      for (int i = 0; i < ARR; i++) begin
        checks++;
        if (rnd[i] !== model[i]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d lane=%0d got=%h exp=%h", n, i, rnd[i], model[i]);
        end
      end
      for (int i = 1; i < ARR; i++) begin
        checks++;
        if (rnd[i] == rnd[0]) failures++;
      end
      en = ($urandom_range(0, 3) != 0);
      if (en)
        for (int i = 0; i < ARR; i++) begin
          model[i] = model[i] ^ (model[i] << 13);
          model[i] = model[i] ^ (model[i] >> 17);
          model[i] = model[i] ^ (model[i] << 5);
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fixar_accumulator: random sequences of clear, add and clear-with-add
// in both precisions, compared with a reference model kept in the
// testbench (32-bit sums, or two independent 16-bit sums per column).
module tb_fixar_accumulator;
  import fixar_pkg::*;
  logic clk = 0, rst_n = 0, half, clr, en;
  logic [ARR-1:0][31:0] psum_in, acc;
  logic [31:0] ref_acc [ARR];
  int checks = 0, failures = 0;

  fixar_accumulator dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    half = 0; clr = 0; en = 0; psum_in = '0;
    for (int c = 0; c < ARR; c++) ref_acc[c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      if (n % 50 == 0) half = $urandom_range(0, 1);
      clr = ($urandom_range(0, 9) == 0);
      en  = ($urandom_range(0, 3) != 0);
      for (int c = 0; c < ARR; c++) psum_in[c] = $urandom;
      for (int c = 0; c < ARR; c++) begin
        logic [31:0] b;
        b = clr ? 32'd0 : ref_acc[c];
        if (en) ref_acc[c] = half ? {b[31:16] + psum_in[c][31:16], b[15:0] + psum_in[c][15:0]}
                                  : b + psum_in[c];
        else ref_acc[c] = b;
      end
      @(posedge clk); #1;
      for (int c = 0; c < ARR; c++) begin
        checks++;
        if (acc[c] !== ref_acc[c]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d c=%0d got=%h exp=%h", n, c, acc[c], ref_acc[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

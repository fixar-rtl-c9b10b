// tb_fixar_line_buffer: checks that slot r of a loaded word appears on
// act_row[r] exactly 1 + r cycles after the load and that all rows are zero
// on every other cycle, with loads back to back and with gaps.
module tb_fixar_line_buffer;
  import fixar_pkg::*;
  logic clk = 0, rst_n = 0, fire;
  logic [ARR-1:0][31:0] word_in, act_row;
  int checks = 0, failures = 0;
  word_t hist [int];     // word loaded at cycle t
  int cyc = 0;

  fixar_line_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fire = 0; word_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      // compare outputs of this cycle against the loads of earlier cycles
      for (int r = 0; r < ARR; r++) begin
        logic [31:0] exp;
        exp = hist.exists(cyc - 1 - r) ? hist[cyc - 1 - r][r] : 32'd0;
        checks++;
        if (act_row[r] !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL cyc=%0d row=%0d got=%h exp=%h", cyc, r, act_row[r], exp);
        end
      end
      fire = (n < 250) && ($urandom_range(0, 2) != 0);
      for (int i = 0; i < ARR; i++) word_in[i] = $urandom | 32'h1;
      if (fire) hist[cyc] = word_in;
      @(posedge clk);
      cyc++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fixar_act_mem: writes every one of the 47 words with random data, then
// reads them back in random order (data one cycle after the address),
// including a read and a write of the same address in one cycle (the read
// returns the old word) and reads beyond the depth (zero).
module tb_fixar_act_mem;
  import fixar_pkg::*;
  logic clk = 0, re, we;
  logic [AADDR_W-1:0] raddr, waddr;
  word_t rdata, wdata;
  word_t model [ACT_DEPTH];
  int checks = 0, failures = 0;

  fixar_act_mem dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = '0;
    for (int a = 0; a < ACT_DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AADDR_W'(a);
      for (int i = 0; i < ARR; i++) wdata[i] = $urandom;
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 300; n++) begin
      int a;
      word_t exp;
      a = $urandom_range(0, 63);
      @(negedge clk);
      re = 1; raddr = AADDR_W'(a);
      exp = (a < ACT_DEPTH) ? model[a] : '0;
      we = (n % 5 == 0) && (a < ACT_DEPTH);
      waddr = AADDR_W'(a);
      for (int i = 0; i < ARR; i++) wdata[i] = $urandom;
      if (we) model[a] = wdata;
      @(posedge clk); #1;
      re = 0; we = 0;
      checks++;
      if (rdata !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL addr=%0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

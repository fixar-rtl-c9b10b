// tb_fixar_weight_mem: random writes over the whole 16384-word range, then
// random reads checked against a sparse model; also checks that a word
// keeps its value while re is low (read data register holds).
module tb_fixar_weight_mem;
  import fixar_pkg::*;
  logic clk = 0, re, we;
  logic [WADDR_W-1:0] raddr, waddr;
  word_t rdata, wdata;
  word_t model [int];
  int checks = 0, failures = 0;

  fixar_weight_mem dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int keys [$];
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = '0;
    for (int n = 0; n < 2000; n++) begin
      int a;
      a = (n == 0) ? 0 : (n == 1) ? WMEM_DEPTH - 1 : $urandom_range(0, WMEM_DEPTH - 1);
      @(negedge clk);
      we = 1; waddr = WADDR_W'(a);
      for (int i = 0; i < ARR; i++) wdata[i] = $urandom;
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (model[k]) keys.push_back(k);
    for (int n = 0; n < 1000; n++) begin
      int a;
      a = keys[$urandom_range(0, keys.size() - 1)];
      @(negedge clk); re = 1; raddr = WADDR_W'(a);
      @(negedge clk); re = 0; raddr = WADDR_W'($urandom);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr=%0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fixar_grad_mem: after reset (all words zero) accumulates random gradient
// words into them many times (lane-wise 32-bit sums), overwrites some, and
// reads everything back against a reference model.
module tb_fixar_grad_mem;
  import fixar_pkg::*;
  logic clk = 0, rst_n = 0, re, we, acc;
  logic [WADDR_W-1:0] raddr, waddr;
  word_t rdata, wdata;
  word_t model [int];
  int checks = 0, failures = 0;

  fixar_grad_mem dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int addrs [8] = '{0, 1, 2, 100, 5000, 9999, 16382, 16383};
    re = 0; we = 0; acc = 0; raddr = 0; waddr = 0; wdata = '0;
    @(negedge clk); rst_n = 1;
    // after reset every word reads as zero
    foreach (addrs[j]) model[addrs[j]] = '0;
    for (int n = 0; n < 800; n++) begin
      int a;
      a = addrs[$urandom_range(0, 7)];
      @(negedge clk);
      we = 0; acc = 0;
      waddr = WADDR_W'(a);
      for (int i = 0; i < ARR; i++) wdata[i] = $urandom;
      if (n % 17 == 0) begin
        we = 1; model[a] = wdata;
      end else begin
        acc = 1;
        for (int i = 0; i < ARR; i++) model[a][i] = model[a][i] + wdata[i];
      end
    end
    @(negedge clk); we = 0; acc = 0;
    foreach (addrs[j]) begin
      @(negedge clk); re = 1; raddr = WADDR_W'(addrs[j]);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== model[addrs[j]]) begin
        failures++;
        $display("FAIL addr=%0d", addrs[j]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

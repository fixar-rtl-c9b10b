// tb_fixar_pe_array: loads a random 16x16 weight tile (by columns, by rows,
// and broadcast to all rows), drives one activation vector with the row skew
// the array expects (row r one cycle after row r-1) and checks each column
// sum at the bottom, 16 cycles after row 0, against a reference computed
// in the testbench. Full and half precision.
module tb_fixar_pe_array;
  import fixar_pkg::*;
  logic clk = 0, rst_n = 0;
  logic half, ld_en, ld_col, ld_all;
  logic [3:0] ld_idx;
  logic [ARR-1:0][31:0] ld_word, act_row, psum_out;
  int checks = 0, failures = 0;
  logic [31:0] W [ARR][ARR];    // W[r][c] = weight of PE(r,c)
  logic [31:0] A [ARR];

  fixar_pe_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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

  function automatic logic [31:0] rnd_w();
    logic [31:0] v;
    v = $urandom;
    return {{12{v[19]}}, v[19:0]};     // |w| < 8
  endfunction

  task automatic load(input int mode);   // 0: by column, 1: by row, 2: all rows
    for (int i = 0; i < ARR; i++) begin
      @(negedge clk);
      for (int e = 0; e < ARR; e++) ld_word[e] = rnd_w();
      ld_en = 1; ld_idx = 4'(i); ld_col = (mode == 0); ld_all = (mode == 2);
      for (int e = 0; e < ARR; e++) begin
        if (mode == 0) W[e][i] = ld_word[e];
        else if (mode == 1) W[i][e] = ld_word[e];
        else for (int r = 0; r < ARR; r++) W[r][e] = ld_word[e];
      end
      if (mode == 2) break;
    end
    @(negedge clk);
    ld_en = 0; ld_all = 0;
  endtask

  task automatic run(input logic h);
    logic [31:0] exp [ARR];
    half = h;
    for (int r = 0; r < ARR; r++) A[r] = $urandom;
    for (int c = 0; c < ARR; c++) begin
      exp[c] = 0;
      for (int r = 0; r < ARR; r++) exp[c] = mac(h, exp[c], W[r][c], A[r]);
    end
    for (int t = 0; t < ARR; t++) begin
      for (int r = 0; r < ARR; r++) act_row[r] = (r == t) ? A[r] : 32'd0;
      @(negedge clk);
    end
    act_row = '0;
    // row 15 was driven in the last loop cycle; its sum is out after one edge
    for (int c = 0; c < ARR; c++) begin
      checks++;
      if (psum_out[c] !== exp[c]) begin
        failures++;
        if (failures < 10) $display("FAIL col=%0d half=%0d got=%h exp=%h", c, h, psum_out[c], exp[c]);
      end
    end
  endtask

  initial begin
    half = 0; ld_en = 0; ld_col = 0; ld_all = 0; ld_idx = 0; ld_word = '0; act_row = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 12; n++) begin
      load(n % 3);
      run(0);
      run(1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

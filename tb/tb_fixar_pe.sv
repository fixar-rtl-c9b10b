// tb_fixar_pe: self-checking test of the configurable-datapath PE.
// Random weights, activations and incoming partial sums in both precisions;
// the expected value is computed with plain 64-bit arithmetic:
//   full: Y = PSUM + ((W * A) >>> 16)[31:0]
//   half: Y[31:16] = PSUM[31:16] + ((W * A[31:16]) >>> 16)[15:0], same for [15:0]
// Also checks that the weight register only changes on ld_en and that Y
// appears one clock after the inputs.
module tb_fixar_pe;
  logic clk = 0, rst_n = 0;
  logic half, ld_en;
  logic [31:0] w_in, a_in, psum_in, y;
  int checks = 0, failures = 0;

  fixar_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] model(input logic h, input logic [31:0] w, a, ps);
    longint wl, p, ph, pl;
    wl = longint'($signed(w));
    if (!h) begin
      p = wl * longint'($signed(a));
      return ps + 32'(p >>> 16);
    end
    ph = wl * longint'($signed(a[31:16]));
    pl = wl * longint'($signed(a[15:0]));
    return {ps[31:16] + 16'(ph >>> 16), ps[15:0] + 16'(pl >>> 16)};
  endfunction

  logic [31:0] w_cur;
  initial begin
    half = 0; ld_en = 0; w_in = 0; a_in = 0; psum_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      w_cur = $urandom;
      if (n % 3 == 0) w_cur = {{8{w_cur[31]}}, w_cur[23:0]};
      w_in = w_cur; ld_en = 1;
      @(negedge clk);
      ld_en = 0;
      w_in = $urandom;            // must not be taken
      half = n[0];
      a_in = $urandom;
      psum_in = $urandom;
      if (n < 4) begin            // hand-made values: 1.5 * 2.0 + 0.25 = 3.25
        half = 0; a_in = 32'h0002_0000; psum_in = 32'h0000_4000;
        if (w_cur != 32'h0001_8000) begin
          @(negedge clk); w_in = 32'h0001_8000; ld_en = 1; w_cur = w_in;
          @(negedge clk); ld_en = 0; w_in = $urandom;
        end
      end
      @(posedge clk); #1;
      checks++;
      if (y !== model(half, w_cur, a_in, psum_in)) begin
        failures++;
        $display("FAIL n=%0d half=%0d w=%h a=%h ps=%h y=%h exp=%h", n, half, w_cur, a_in, psum_in, y,
                 model(half, w_cur, a_in, psum_in));
      end
      if (n < 4) begin
        checks++;
        if (y !== 32'h0003_4000) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fixar_workload: the actor network of the HalfCheetah benchmark at full
// size (17 states -> 400 -> 300 -> 6 actions, ReLU, ReLU, tanh) on the
// accelerator at its default parameters. Hopper and Swimmer differ only in
// the state and action sizes and use the same instruction sequence.
//
// Weights go in through the host port: W1 stored transposed (17 rows of 25
// words), W2 row by row (300 rows of 25 words), W3 row by row (6 rows of 19
// words), 8039 words in all. Two different states are run, one per core's
// activation memory, and every hidden and output element is compared with a
// bit-exact fixed-point model (per-product truncation, wrap-around sums);
// the tanh outputs are compared with real tanh within 0.03. Then the errors
// of both actions are back-propagated through W3 on both cores at once
// (intra-batch) with the ReLU-derivative mask, again compared bit for bit.
// The cycle count of each layer is checked against the schedule of the
// control unit: one 16-cycle weight pre-load per core and per group of N
// input tiles, plus the array latency, so forward time per tile group is
// 16 N + ARR + a few cycles (about 53 with N = 2). Back-propagation of two
// vectors costs one shared pre-load per input tile.
// Activation memory map (47 words per core): x 0..1, h1 2..26, h2 27..45,
// y 46; the back-propagation reuses x (errors) and h1 (result).
module tb_fixar_workload;
  import fixar_pkg::*;

  localparam int S = 17, H1 = 400, H2 = 300, A = 6;
  localparam int W1_BASE = 0;                   // 17 x 25 words (W1^T)
  localparam int W2_BASE = W1_BASE + S * 25;    // 300 x 25 words
  localparam int W3_BASE = W2_BASE + H2 * 25;   // 6 x 19 words
  localparam int X_AD = 0, H1_AD = 2, H2_AD = 27, Y_AD = 46;

  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, busy, half_mode, out_valid;
  instr_t instr;
  logic [31:0] timestep;
  logic [4:0] q_shift;
  fx_t q_min, q_max;
  word_t out_word;
  logic host_w_we, host_a_we, host_a_re;
  logic [WADDR_W-1:0] host_w_addr;
  logic [1:0] host_a_core;
  logic [AADDR_W-1:0] host_a_addr;
  word_t host_w_wdata, host_a_wdata, host_a_rdata;

  fixar_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] W1 [H1][S], W2 [H2][H1], W3 [A][H2];
  function automatic logic [31:0] pm(input logic [31:0] w, input logic [31:0] a);
    return 32'((longint'($signed(w)) * longint'($signed(a))) >>> 16);
  endfunction
  function automatic logic [31:0] relu(input logic [31:0] v);
    return $signed(v) > 0 ? v : 32'd0;
  endfunction
  function automatic logic [31:0] rnd_small(input int bits);
    logic [31:0] r;
    r = $urandom;
    r = r & ((32'd1 << bits) - 1);
    return $urandom_range(0, 1) ? r : -r;
  endfunction

  // ---------------- host helpers ----------------
  task automatic wr_w(input int addr, input word_t d);
    @(negedge clk);
    host_w_we = 1; host_w_addr = WADDR_W'(addr); host_w_wdata = d;
    @(negedge clk);
    host_w_we = 0;
  endtask
  task automatic wr_a(input int core, input int addr, input word_t d);
    @(negedge clk);
    host_a_we = 1; host_a_core = 2'(core); host_a_addr = AADDR_W'(addr); host_a_wdata = d;
    @(negedge clk);
    host_a_we = 0;
  endtask
  task automatic rd_a(input int core, input int addr, output word_t d);
    @(negedge clk);
    host_a_re = 1; host_a_core = 2'(core); host_a_addr = AADDR_W'(addr);
    @(negedge clk);
    host_a_re = 0;
    d = host_a_rdata;
  endtask
  task automatic wr_vec(input int core, input int addr, input logic [31:0] v [], input int n);
    for (int m = 0; m < (n + 15) / 16; m++) begin
      word_t d;
      d = '0;
      for (int i = 0; i < 16; i++) if (m * 16 + i < n) d[i] = v[m * 16 + i];
      wr_a(core, addr + m, d);
    end
  endtask
  task automatic rd_vec(input int core, input int addr, input int n, output logic [31:0] v []);
    v = new[n];
    for (int m = 0; m < (n + 15) / 16; m++) begin
      word_t d;
      rd_a(core, addr + m, d);
      for (int i = 0; i < 16; i++) if (m * 16 + i < n) v[m * 16 + i] = d[i];
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;
  task automatic issue(input instr_t ins, output int cycles);
    int c0;
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = ins; instr_valid = 1;
    c0 = cyc;
    @(negedge clk);
    instr_valid = 0;
    while (busy) @(negedge clk);
    cycles = cyc - c0;
  endtask

  function automatic instr_t mk(input op_e op, input afn_e f, input int wbase, input int p, input int q,
                                input int src, input int dst, input int aux);
    instr_t i;
    i = '0;
    i.op = op; i.afn = f; i.wbase = WADDR_W'(wbase); i.p = DIM_W'(p); i.q = DIM_W'(q);
    i.src = AADDR_W'(src); i.dst = AADDR_W'(dst); i.aux = AADDR_W'(aux);
    return i;
  endfunction

  task automatic check_vec(input string tag, input logic [31:0] got [], input logic [31:0] exp [], input int n);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (got[i] !== exp[i]) begin
        failures++;
        if (failures < 20) $display("FAIL %s[%0d] got=%h exp=%h", tag, i, got[i], exp[i]);
      end
    end
  endtask

  task automatic check_cycles(input string tag, input int got, input int lo, input int hi);
    checks++;
    $display("%s: %0d cycles (expected %0d..%0d)", tag, got, lo, hi);
    if (got < lo || got > hi) begin failures++; $display("FAIL cycles %s", tag); end
  endtask

  // forward schedule: per output tile, ceil(Qt / N) groups, each a 16-cycle
  // pre-load per core (not overlapped with compute); the upper bound adds
  // the array latency plus a few control cycles per group and per tile
  function automatic int fwd_lo(input int p, input int q);
    return ((p + 15) / 16) * (((q + 15) / 16 + N_CORES - 1) / N_CORES) * 16 * N_CORES;
  endfunction
  function automatic int fwd_hi(input int p, input int q);
    return ((p + 15) / 16) * (((q + 15) / 16 + N_CORES - 1) / N_CORES) * (16 * N_CORES + ARR + 8)
         + ((p + 15) / 16) * (ARR + 8);
  endfunction

  initial begin
    logic [31:0] xs0 [2][], h1s [2][], h2s [2][], es [2][];
    logic [31:0] got [], exp [];
    int cycles;
    instr_t ins;

    instr_valid = 0; instr = '0;
    host_w_we = 0; host_a_we = 0; host_a_re = 0; host_w_addr = 0; host_a_core = 0; host_a_addr = 0;
    host_w_wdata = '0; host_a_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // small weights keep 400-term sums in range: |w| < 2^-6
    for (int p = 0; p < H1; p++) for (int q = 0; q < S;  q++) W1[p][q] = rnd_small(10);
    for (int p = 0; p < H2; p++) for (int q = 0; q < H1; q++) W2[p][q] = rnd_small(10);
    for (int p = 0; p < A;  p++) for (int q = 0; q < H2; q++) W3[p][q] = rnd_small(12);
    for (int q = 0; q < S; q++) for (int m = 0; m < 25; m++) begin
      word_t d; d = '0;
      for (int i = 0; i < 16; i++) if (m * 16 + i < H1) d[i] = W1[m * 16 + i][q];
      wr_w(W1_BASE + q * 25 + m, d);
    end
    for (int p = 0; p < H2; p++) for (int m = 0; m < 25; m++) begin
      word_t d; d = '0;
      for (int i = 0; i < 16; i++) if (m * 16 + i < H1) d[i] = W2[p][m * 16 + i];
      wr_w(W2_BASE + p * 25 + m, d);
    end
    for (int p = 0; p < A; p++) for (int m = 0; m < 19; m++) begin
      word_t d; d = '0;
      for (int i = 0; i < 16; i++) if (m * 16 + i < H2) d[i] = W3[p][m * 16 + i];
      wr_w(W3_BASE + p * 19 + m, d);
    end

    // ---- forward pass of two states, one in each core's memory ----
    for (int c = 0; c < 2; c++) begin
      xs0[c] = new[S]; h1s[c] = new[H1]; h2s[c] = new[H2];
      for (int i = 0; i < S; i++) xs0[c][i] = rnd_small(17);
      wr_vec(c, X_AD, xs0[c], S);
      for (int p = 0; p < H1; p++) begin
        logic [31:0] s; s = 0;
        for (int q = 0; q < S; q++) s += pm(W1[p][q], xs0[c][q]);
        h1s[c][p] = relu(s);
      end
      for (int p = 0; p < H2; p++) begin
        logic [31:0] s; s = 0;
        for (int q = 0; q < H1; q++) s += pm(W2[p][q], h1s[c][q]);
        h2s[c][p] = relu(s);
      end

      ins = mk(OP_FWD, AF_RELU, W1_BASE, H1, S, X_AD, H1_AD, 0); ins.core = 2'(c); ins.wt_t = 1;
      issue(ins, cycles);
      check_cycles("fwd layer 1", cycles, fwd_lo(H1, S), fwd_hi(H1, S));
      rd_vec(c, H1_AD, H1, got);
      check_vec("h1", got, h1s[c], H1);

      ins = mk(OP_FWD, AF_RELU, W2_BASE, H2, H1, H1_AD, H2_AD, 0); ins.core = 2'(c);
      issue(ins, cycles);
      check_cycles("fwd layer 2", cycles, fwd_lo(H2, H1), fwd_hi(H2, H1));
      rd_vec(c, H2_AD, H2, got);
      check_vec("h2", got, h2s[c], H2);

      ins = mk(OP_FWD, AF_TANH, W3_BASE, A, H2, H2_AD, Y_AD, 0); ins.core = 2'(c);
      issue(ins, cycles);
      check_cycles("fwd layer 3", cycles, fwd_lo(A, H2), fwd_hi(A, H2));
      rd_vec(c, Y_AD, A, got);
      for (int p = 0; p < A; p++) begin
        logic [31:0] s;
        real t, g;
        s = 0;
        for (int q = 0; q < H2; q++) s += pm(W3[p][q], h2s[c][q]);
        t = $tanh(real'($signed(s)) / 65536.0);
        g = real'($signed(got[p])) / 65536.0;
        checks++;
        if (g - t > 0.03 || t - g > 0.03) begin
          failures++;
          $display("FAIL action[%0d] core %0d got %f exp %f", p, c, g, t);
        end
      end
    end

    // ---- back-propagation of both action errors through W3, both cores at once ----
    for (int c = 0; c < 2; c++) begin
      es[c] = new[A];
      for (int i = 0; i < A; i++) es[c][i] = rnd_small(16);
      wr_vec(c, X_AD, es[c], A);
    end
    ins = mk(OP_BWD, AF_RELU_GRAD, W3_BASE, A, H2, X_AD, H1_AD, H2_AD);
    issue(ins, cycles);
    // one pre-load per input tile of e, shared by both cores: same time for 2 vectors
    check_cycles("bwd layer 3 (2 vectors)", cycles, ((H2 + 15) / 16) * 16, ((H2 + 15) / 16) * 16 * 4);
    for (int c = 0; c < 2; c++) begin
      exp = new[H2];
      for (int q = 0; q < H2; q++) begin
        logic [31:0] s; s = 0;
        for (int p = 0; p < A; p++) s += pm(W3[p][q], es[c][p]);
        exp[q] = ($signed(h2s[c][q]) > 0) ? s : 32'd0;
      end
      rd_vec(c, H1_AD, H2, got);
      check_vec(c ? "d2_core1" : "d2_core0", got, exp, H2);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

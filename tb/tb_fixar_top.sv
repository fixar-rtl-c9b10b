// tb_fixar_top: end-to-end test of the accelerator on a small actor network
// (17 -> H1 -> H2 -> 6, ReLU, ReLU, tanh), run at the default parameters
// (two cores, 16x16 PEs, full-size memories).
//
// The testbench keeps its own fixed-point model of every layer (per-product
// truncation (w*a)>>>16, wrap-around sums) and checks, through the host
// ports and by peeking into the gradient and weight memories:
//   1. forward propagation of one state with intra-layer parallelism,
//      layer 2 stored transposed, exploration noise on the output, the
//      action sent to the host (tanh compared with real tanh);
//   2. back-propagation of two different error vectors, one per core
//      (intra-batch), through the transposed output layer, masked by the
//      ReLU derivative;
//   3. gradient accumulation e a^T over both cores into gradient memory,
//      twice, so the gradients add up;
//   4. an Adam update of the output layer (direction and size of the
//      step), which also clears the gradients;
//   5. the switch to half precision after the quantization delay, and a
//      forward layer carrying two packed 16-bit vectors.
// Each mechanism is counted; one that never happened is a failure.
module tb_fixar_top;
  import fixar_pkg::*;

  localparam int H1 = 40, H2 = 30, S = 17, A = 6;
  // weight memory layout (word addresses)
  localparam int W1_BASE = 100;              // 40 x 17 row-major, 2 words per row
  localparam int W2_BASE = 300;              // 30 x 40 stored transposed: 40 rows of 2 words
  localparam int W3_BASE = 500;              // 6 x 30 row-major, 2 words per row
  // activation memory layout (word addresses)
  localparam int X_AD = 0, H1_AD = 2, H2_AD = 5, Y_AD = 7, E_AD = 8, D2_AD = 9;

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
  int n_fwd_multi = 0, n_bwd_batch = 0, n_transposed = 0, n_noise = 0, n_host_out = 0;
  int n_relu_mask = 0, n_grad_acc = 0, n_adam = 0, n_mode_switch = 0, n_half_mac = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference arithmetic ----------------
  logic [31:0] W1 [H1][S], W2 [H2][H1], W3 [A][H2];

  function automatic logic [31:0] pm(input logic [31:0] w, input logic [31:0] a);
    return 32'((longint'($signed(w)) * longint'($signed(a))) >>> 16);
  endfunction
  function automatic logic [15:0] pmh(input logic [31:0] w, input logic [15:0] a);
    return 16'((longint'($signed(w)) * longint'($signed(a))) >>> 16);
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

  // PRNG lane model (same reset seeds as the design's generator)
  logic [31:0] prng [16];
  function automatic logic [31:0] xs(input logic [31:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5);
    return x;
  endfunction

  // ---------------- the test ----------------
  initial begin
    logic [31:0] x0 [], x1 [], h1 [], h2 [], h1b [], h2b [], y [], e0 [], e1 [], d0 [], d1 [];
    logic [31:0] exp [], got [];
    int cycles;
    instr_t ins;

    instr_valid = 0; instr = '0;
    host_w_we = 0; host_a_we = 0; host_a_re = 0; host_w_addr = 0; host_a_core = 0; host_a_addr = 0;
    host_w_wdata = '0; host_a_wdata = '0;
    for (int i = 0; i < 16; i++) prng[i] = 32'h2545_f491 ^ (32'h9e37_79b9 * 32'(i + 1));
    repeat (3) @(negedge clk);
    rst_n = 1;

    // weights: |w| < 0.5
    for (int p = 0; p < H1; p++) for (int q = 0; q < S;  q++) W1[p][q] = rnd_small(15);
    for (int p = 0; p < H2; p++) for (int q = 0; q < H1; q++) W2[p][q] = rnd_small(15);
    for (int p = 0; p < A;  p++) for (int q = 0; q < H2; q++) W3[p][q] = rnd_small(15);
    for (int p = 0; p < H1; p++) for (int m = 0; m < 2; m++) begin
      word_t d; d = '0;
      for (int i = 0; i < 16; i++) if (m * 16 + i < S) d[i] = W1[p][m * 16 + i];
      wr_w(W1_BASE + p * 2 + m, d);
    end
    for (int q = 0; q < H1; q++) for (int m = 0; m < 2; m++) begin   // W2^T rows
      word_t d; d = '0;
      for (int i = 0; i < 16; i++) if (m * 16 + i < H2) d[i] = W2[m * 16 + i][q];
      wr_w(W2_BASE + q * 2 + m, d);
    end
    for (int p = 0; p < A; p++) for (int m = 0; m < 2; m++) begin
      word_t d; d = '0;
      for (int i = 0; i < 16; i++) if (m * 16 + i < H2) d[i] = W3[p][m * 16 + i];
      wr_w(W3_BASE + p * 2 + m, d);
    end
    // a word beyond the last row of W3, to check that rows past P are masked
    begin word_t d; for (int i = 0; i < 16; i++) d[i] = 32'h0001_0000; wr_w(W3_BASE + A * 2, d); end

    // noise scale: 2^-8 of the raw 32-bit random number (|noise| < 2^7 LSB... ) and
    // quantization delay 3 timesteps
    ins = mk(OP_CFG, AF_NONE, 0, 0, 0, 0, 0, 0);
    ins.imm = {32'd3, 24'd1678, 3'd0, 5'd20};
    issue(ins, cycles);

    // ---- 1. forward propagation, two states (one per core memory) ----
    x0 = new[S]; x1 = new[S];
    for (int i = 0; i < S; i++) begin x0[i] = rnd_small(17); x1[i] = rnd_small(17); end
    wr_vec(0, X_AD, x0, S);
    wr_vec(1, X_AD, x1, S);
    for (int c = 0; c < 2; c++) begin
      logic [31:0] xv [];
      xv = (c == 0) ? x0 : x1;
      h1 = new[H1]; h2 = new[H2]; y = new[A];
      for (int p = 0; p < H1; p++) begin
        logic [31:0] s; s = 0;
        for (int q = 0; q < S; q++) s += pm(W1[p][q], xv[q]);
        h1[p] = relu(s);
      end
      for (int p = 0; p < H2; p++) begin
        logic [31:0] s; s = 0;
        for (int q = 0; q < H1; q++) s += pm(W2[p][q], h1[q]);
        h2[p] = relu(s);
      end
      ins = mk(OP_FWD, AF_RELU, W1_BASE, H1, S, X_AD, H1_AD, 0); ins.core = 2'(c);
      issue(ins, cycles);
      n_fwd_multi++;                 // 2 input tiles: both cores took one
      rd_vec(c, H1_AD, H1, got);
      check_vec("h1", got, h1, H1);
      ins = mk(OP_FWD, AF_RELU, W2_BASE, H2, H1, H1_AD, H2_AD, 0); ins.core = 2'(c); ins.wt_t = 1;
      issue(ins, cycles);
      n_transposed++;
      rd_vec(c, H2_AD, H2, got);
      check_vec("h2", got, h2, H2);
      // output layer with noise, tanh, to host, end of timestep
      ins = mk(OP_FWD, AF_TANH, W3_BASE, A, H2, H2_AD, Y_AD, 0); ins.core = 2'(c);
      ins.noise = 1; ins.to_host = 1; ins.step = 1;
      fork
        begin
          @(posedge out_valid);
          @(negedge clk);
          n_host_out++;
          for (int p = 0; p < A; p++) begin
            logic [31:0] s;
            real r, t, g;
            s = 0;
            for (int q = 0; q < H2; q++) s += pm(W3[p][q], h2[q]);
            s += 32'($signed(prng[p]) >>> 20);
            r = real'($signed(s)) / 65536.0;
            t = $tanh(r);
            g = real'($signed(out_word[p])) / 65536.0;
            checks++;
            if (g - t > 0.03 || t - g > 0.03) begin
              failures++;
              $display("FAIL action[%0d] got %f exp %f", p, g, t);
            end
          end
          for (int p = A; p < 16; p++) begin
            checks++;
            // padded outputs: tanh(noise) only, small
            if ($signed(out_word[p]) > 32'sh0000_1000 || $signed(out_word[p]) < -32'sh0000_1000) failures++;
          end
          n_noise++;
          for (int i = 0; i < 16; i++) prng[i] = xs(prng[i]);
        end
        issue(ins, cycles);
      join
      if (c == 0) begin h1b = h1; h2b = h2; end
      checks++;
      if (timestep != 32'(c + 1)) begin failures++; $display("FAIL timestep %0d", timestep); end
    end
    // keep layer-2 activations of both states for the mask
    // h2b: state 0 (core 0), h2: state 1 (core 1)

    // ---- 2. back-propagation through W3 (P=6 x Q=30), two errors ----
    e0 = new[A]; e1 = new[A];
    for (int i = 0; i < A; i++) begin e0[i] = rnd_small(16); e1[i] = rnd_small(16); end
    wr_vec(0, E_AD, e0, A);
    wr_vec(1, E_AD, e1, A);
    ins = mk(OP_BWD, AF_RELU_GRAD, W3_BASE, A, H2, E_AD, D2_AD, H2_AD);
    issue(ins, cycles);
    n_bwd_batch++;
    for (int c = 0; c < 2; c++) begin
      logic [31:0] ev [], hv [];
      ev = c ? e1 : e0;
      hv = c ? h2 : h2b;
      exp = new[H2];
      for (int q = 0; q < H2; q++) begin
        logic [31:0] s; s = 0;
        for (int p = 0; p < A; p++) s += pm(W3[p][q], ev[p]);
        exp[q] = ($signed(hv[q]) > 0) ? s : 32'd0;
        if ($signed(hv[q]) <= 0 && s != 0) n_relu_mask++;
      end
      rd_vec(c, D2_AD, H2, got);
      check_vec(c ? "d2_core1" : "d2_core0", got, exp, H2);
    end

    // ---- 3. gradient dW3 += e h2^T over both cores, twice ----
    for (int rep = 0; rep < 2; rep++) begin
      ins = mk(OP_GRAD, AF_NONE, W3_BASE, A, H2, E_AD, 0, H2_AD);
      issue(ins, cycles);
    end
    for (int p = 0; p < A; p++) for (int m = 0; m < 2; m++) begin
      word_t gw;
      gw = dut.u_gmem.mem[W3_BASE + p * 2 + m];
      for (int i = 0; i < 16; i++) begin
        int q;
        logic [31:0] g;
        q = m * 16 + i;
        g = (q < H2) ? 32'(2) * (pm(h2b[q], e0[p]) + pm(h2[q], e1[p])) : 32'd0;
        checks++;
        if (gw[i] !== g) begin
          failures++;
          if (failures < 20) $display("FAIL grad p=%0d q=%0d got=%h exp=%h", p, q, gw[i], g);
        end
      end
    end
    n_grad_acc++;

    // ---- 4. Adam on the 12 words of W3 ----
    ins = mk(OP_ADAM, AF_NONE, W3_BASE, 0, 0, 0, 0, 0);
    ins.nwords = WADDR_W'(A * 2);
    issue(ins, cycles);
    n_adam++;
    for (int p = 0; p < A; p++) for (int m = 0; m < 2; m++) begin
      word_t ww, gw;
      ww = dut.u_wmem.mem[W3_BASE + p * 2 + m];
      gw = dut.u_gmem.mem[W3_BASE + p * 2 + m];
      for (int i = 0; i < 16; i++) begin
        int q;
        real g, mm, vv, stp, expw, gotw;
        q = m * 16 + i;
        g  = (q < H2) ? real'($signed(32'(2) * (pm(h2b[q], e0[p]) + pm(h2[q], e1[p])))) / 65536.0 : 0.0;
        mm = 0.1 * g; vv = 0.001 * g * g;
        stp = 1678.0 / 16777216.0 * mm / ($sqrt(vv) + 1.0 / 16777216.0);
        expw = ((q < H2) ? real'($signed(W3[p][q])) / 65536.0 : 0.0) - stp;
        gotw = real'($signed(ww[i])) / 65536.0;
        checks += 2;
        // |g| below 2^-8 is outside the optimizer's resolved range: check direction only
        if ((g > 0.004 || g < -0.004) ? (gotw - expw > 0.05 * (stp < 0 ? -stp : stp) + 3.0 / 65536.0 ||
                                         expw - gotw > 0.05 * (stp < 0 ? -stp : stp) + 3.0 / 65536.0)
                                      : (g > 0 && gotw > expw + stp) || (g < 0 && gotw < expw + stp)) begin
          failures++;
          if (failures < 20) $display("FAIL adam p=%0d q=%0d got=%f exp=%f g=%f", p, q, gotw, expw, g);
        end
        if (gw[i] != 0) failures++;
      end
    end

    // ---- 5. third timestep reaches the quantization delay -> half precision ----
    ins = mk(OP_FWD, AF_RELU, W1_BASE, H1, S, X_AD, H1_AD, 0); ins.step = 1;
    issue(ins, cycles);
    repeat (3) @(posedge clk);   // freeze pulse and frozen flag are registered
    checks++;
    if (!half_mode) begin failures++; $display("FAIL no switch to half precision"); end
    else n_mode_switch++;
    begin
      // range seen by the monitor decides the shift
      longint rng;
      int s_exp;
      rng = longint'(q_min < 0 ? -q_min : q_min) + longint'(q_max < 0 ? -q_max : q_max);
      s_exp = 16;
      for (int k = 0; k <= 16; k++) if ((rng >> k) < 32768) begin s_exp = k; break; end
      checks++;
      if (q_shift != 5'(s_exp)) begin failures++; $display("FAIL shift %0d exp %0d", q_shift, s_exp); end
    end
    // two states packed as 16-bit lanes (F = 16 - s fractional bits), layer 1
    begin
      logic [31:0] xp [];
      logic [15:0] xa [S], xb [S];
      xp = new[S];
      for (int i = 0; i < S; i++) begin
        xa[i] = 16'($signed(x0[i]) >>> q_shift);
        xb[i] = 16'($signed(x1[i]) >>> q_shift);
        xp[i] = {xa[i], xb[i]};
      end
      wr_vec(0, X_AD, xp, S);
      ins = mk(OP_FWD, AF_RELU, W1_BASE, H1, S, X_AD, H1_AD, 0);
      issue(ins, cycles);
      n_half_mac++;
      exp = new[H1];
      for (int p = 0; p < H1; p++) begin
        logic [15:0] sa, sb;
        sa = 0; sb = 0;
        for (int q = 0; q < S; q++) begin sa += pmh(W1[p][q], xa[q]); sb += pmh(W1[p][q], xb[q]); end
        exp[p] = {($signed(sa) > 0 ? sa : 16'd0), ($signed(sb) > 0 ? sb : 16'd0)};
      end
      rd_vec(0, H1_AD, H1, got);
      check_vec("h1_half", got, exp, H1);
    end

    // ---- every mechanism must have happened ----
    begin
      int counts [10];
      string names [10];
      counts = '{n_fwd_multi, n_bwd_batch, n_transposed, n_noise, n_host_out,
                          n_relu_mask, n_grad_acc, n_adam, n_mode_switch, n_half_mac};
      names = '{"intra-layer FWD", "intra-batch BWD", "transposed weights", "noise",
                            "action to host", "ReLU-derivative mask", "gradient accumulation",
                            "Adam update", "precision switch", "half-precision MAC"};
      for (int k = 0; k < 10; k++) begin
        $display("mechanism %-22s : %0d", names[k], counts[k]);
        checks++;
        if (counts[k] == 0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

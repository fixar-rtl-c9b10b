// fixar_ctrl: control unit of the FIXAR accelerator.
//
// Executes one host instruction (fixar_pkg::instr_t) at a time; instr_ready
// is high while idle. Every training or inference step of a timestep
// (critic FP, BP, WU, actor BP, WU, FP) is a sequence of these instructions
// issued by the host:
//
// OP_FWD  y = f(W x): forward MVM of one vector (two in half precision)
//   with intra-layer parallelism. For each 16-row output tile, the input
//   tiles are dealt round robin to the N cores (core k takes input tiles
//   k, k+N, ...). Per group of N tiles, 16 weight words are pre-loaded into
//   each core (16 cycles per core), the vector's words are read from the
//   activation memory instr.core and fired into all cores at once, and the
//   cores accumulate locally. After the last group, the N accumulators are
//   added (the cross-core reduction), passed through the activation unit
//   (optionally with PRNG noise) and written to activation memory
//   instr.core at dst + tile; with to_host the word also goes to the host.
//   Matrix row -> PE column mapping.
// OP_BWD  y = f(W^T e): transposed MVM with intra-batch parallelism. Each
//   core works on the vector in its own activation memory; the same 16
//   weight words are pre-loaded into all cores at once (matrix row -> PE
//   row), and each core writes its own result. AF_RELU_GRAD masks the
//   result with the forward activations stored at aux.
// OP_GRAD gradient memory += e a^T (e at src, P long; a at aux, Q long),
//   summed over the cores' vectors. The PE array acts as 16 multipliers:
//   a word of a is pre-loaded into every PE row, and e is fired one element
//   at a time (all other rows zero), so the bottom row yields e_p * a for 16
//   columns per cycle. In half precision one 16-bit lane (instr.lane) is
//   widened to Q16.16 and the PEs run at full precision.
// OP_ADAM runs the Adam optimizer over nwords weight words from wbase and
//   clears the gradient words it consumed.
// OP_CFG  sets the quantization delay d, the Adam step size and the noise
//   scale.
// Quantization-aware training: OP_FWD with step = 1 ends a timestep. When
// the timestep count reaches d (d > 0), freeze is pulsed: the quantizer
// fixes its scale and the datapath switches to half precision for good.
// Before that, every forward result is shown to the quantizer's monitor.
//
// Weight layout: W (P x Q) is stored row by row, ceil(Q/16) words per row
// (wt_t = 0), or as W^T row by row, ceil(P/16) words per row (wt_t = 1);
// the control unit then swaps the pre-load orientation. Rows beyond P or Q
// are pre-loaded as zero; padding elements inside a word must be zero.
//
// The instruction set, this layout, the GRAD pass on the PE array and all
// cycle timing are this design's; the two mappings, the interleaving of
// columns over cores, the distribution of a batch over cores, and the
// quantization delay are the paper's.
// A few outputs are plain wires from inputs (the monitor word is the
// activation unit's output, the ReLU mask words come straight from the
// activation memories, the Adam result goes to the weight write port):
// the control unit only routes them.
module fixar_ctrl
  import fixar_pkg::*;
#(
  parameter int unsigned N = N_CORES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host instructions
  input  logic                  instr_valid,
  output logic                  instr_ready,
  input  instr_t                instr,
  // status
  output logic                  busy,
  output logic [31:0]           timestep,
  output logic                  out_valid,
  output word_t                 out_word,
  // weight memory
  output logic                  w_re,
  output logic [WADDR_W-1:0]    w_raddr,
  input  word_t                 w_rdata,
  output logic                  w_we,
  output logic [WADDR_W-1:0]    w_waddr,
  output word_t                 w_wdata,
  // gradient memory
  output logic                  g_re,
  output logic [WADDR_W-1:0]    g_raddr,
  input  word_t                 g_rdata,
  output logic                  g_we,
  output logic                  g_acc,
  output logic [WADDR_W-1:0]    g_waddr,
  output word_t                 g_wdata,
  // activation memories, one per core
  output logic [N-1:0]          a_re,
  output logic [AADDR_W-1:0]    a_raddr [N],
  input  word_t                 a_rdata [N],
  output logic [N-1:0]          a_we,
  output logic [AADDR_W-1:0]    a_waddr,
  output word_t                 a_wdata [N],
  // AAP cores
  output logic                  c_half,
  output logic [N-1:0]          c_ld_en,
  output logic                  c_ld_col,
  output logic                  c_ld_all,
  output logic [3:0]            c_ld_idx,
  output word_t                 c_ld_word [N],
  output logic [N-1:0]          c_fire,
  output word_t                 c_act_word [N],
  output logic                  c_acc_clr,
  input  logic                  c_acc_done,
  input  word_t                 c_acc [N],
  // activation units, one per core
  output afn_e                  u_afn,
  output logic                  u_noise_en,
  output word_t                 u_noise,
  output word_t                 u_x [N],
  output word_t                 u_mask [N],
  input  word_t                 u_y [N],
  // quantizer
  output logic                  q_mon_en,
  output word_t                 q_mon_word,
  output logic                  q_freeze,
  input  logic                  q_frozen,
  input  logic [4:0]            q_s,
  // PRNG
  output logic                  r_en,
  input  word_t                 r_rnd,
  // Adam optimizer
  output logic                  o_start,
  output logic [WADDR_W-1:0]    o_addr,
  output logic [23:0]           o_lr,
  output word_t                 o_w,
  output word_t                 o_g,
  input  logic                  o_done,
  input  word_t                 o_w_new
);
  localparam int unsigned CW = (N > 1) ? $clog2(N) : 1;

  typedef enum logic [4:0] {
    S_IDLE, S_OT, S_PRE, S_ACT, S_ACTW, S_FIRE, S_WAIT, S_RES, S_WR, S_END,
    S_GPRE, S_GPRE2, S_GU, S_GU2, S_GFIRE, S_GDRAIN,
    S_ARD, S_AST, S_AWAIT
  } state_e;
  state_e st;

  instr_t      ir;
  logic [31:0] qdelay;
  logic [23:0] lr;
  logic [4:0]  nshift;

  // loop counters
  logic [6:0]  ot, ot_n;      // output tile
  logic [6:0]  it_base;       // first input tile of the current group
  logic [6:0]  in_t;          // number of input tiles
  logic [CW-1:0] kc;          // core being pre-loaded / read
  logic [4:0]  ii;            // word index within a pre-load
  logic [6:0]  gm;            // GRAD: v tile
  logic [6:0]  gut;           // GRAD: u tile
  logic [4:0]  gj;            // GRAD: element within u tile
  logic [10:0] gwi;           // GRAD: next u index to write back
  logic [10:0] gout;          // GRAD: results outstanding
  logic [WADDR_W-1:0] ak;     // ADAM word counter
  word_t       act_q [N];
  word_t       w_hold, g_hold;
  logic          rd_v;        // an activation word was read in the last cycle
  logic [CW-1:0] rd_k;        // FWD: for this core

  // pre-load pipeline (data arrives one cycle after the read)
  logic          pl_v, pl_col, pl_all, pl_zero, pl_act;
  logic [N-1:0]  pl_core;
  logic [3:0]    pl_idx;

  logic [CW-1:0] sel;         // FWD: activation memory of the vector
  assign sel = CW'(ir.core);

  logic half_run;
  assign half_run = q_frozen && (ir.op != OP_GRAD);
  assign c_half   = half_run;

  // derived sizes
  logic [DIM_W-1:0] u_len;
  logic [6:0] p_t, q_t, u_t, v_t;
  always_comb begin
    p_t = 7'(tiles(ir.p));
    q_t = 7'(tiles(ir.q));
    // GRAD: word (i, m) of the stored matrix = u[i] * v[16m +: 16]
    u_len = ir.wt_t ? ir.q : ir.p;
    u_t   = ir.wt_t ? q_t : p_t;
    v_t   = ir.wt_t ? p_t : q_t;
  end

  // Lane selection for GRAD in half precision
  function automatic word_t unpack(input word_t wd, input logic hl, input logic en, input logic [4:0] s);
    word_t o;
    for (int i = 0; i < ARR; i++)
      o[i] = en ? widen(hx_t'(hl ? wd[i][31:16] : wd[i][15:0]), s) : wd[i];
    return o;
  endfunction

  // weight word address and validity for pre-load word ii of core tile
  logic [16:0]       pre_addr;
  logic              pre_ok;
  logic              pre_col;
  logic [6:0]        cur_it;
  always_comb begin
    logic [16:0] row;
    cur_it = it_base + 7'(kc);
    row    = '0;
    pre_addr = '0;
    pre_ok   = 1'b0;
    pre_col  = 1'b0;
    if (ir.op == OP_FWD) begin
      if (!ir.wt_t) begin   // row p = ot*16+ii of W, word cur_it; row -> PE column
        row = 17'(ot) * 17'(ARR) + 17'(ii);
        pre_ok = row < 17'(ir.p);
        pre_addr = 17'(ir.wbase) + row * 17'(q_t) + 17'(cur_it);
        pre_col = 1'b1;
      end else begin        // row q = cur_it*16+ii of W^T, word ot; -> PE row
        row = 17'(cur_it) * 17'(ARR) + 17'(ii);
        pre_ok = row < 17'(ir.q);
        pre_addr = 17'(ir.wbase) + row * 17'(p_t) + 17'(ot);
        pre_col = 1'b0;
      end
    end else begin          // BWD: output tile ot over Q, input tile over P
      if (!ir.wt_t) begin   // row p = it*16+ii of W, word ot; -> PE row
        row = 17'(it_base) * 17'(ARR) + 17'(ii);
        pre_ok = row < 17'(ir.p);
        pre_addr = 17'(ir.wbase) + row * 17'(q_t) + 17'(ot);
        pre_col = 1'b0;
      end else begin        // row q = ot*16+ii of W^T, word it; -> PE column
        row = 17'(ot) * 17'(ARR) + 17'(ii);
        pre_ok = row < 17'(ir.q);
        pre_addr = 17'(ir.wbase) + row * 17'(p_t) + 17'(it_base);
        pre_col = 1'b1;
      end
    end
  end

  // cross-core reduction (lane-wise in half precision)
  word_t red;
  always_comb begin
    red = '0;
    for (int k = 0; k < N; k++)
      for (int i = 0; i < ARR; i++) begin
        if (half_run) red[i] = {red[i][31:16] + c_acc[k][i][31:16], red[i][15:0] + c_acc[k][i][15:0]};
        else          red[i] = red[i] + c_acc[k][i];
      end
  end

  // activation unit inputs; the mask words read in S_RES are still on the
  // memories' read ports in S_WR
  always_comb begin
    for (int k = 0; k < N; k++) begin
      u_x[k]    = (ir.op == OP_FWD) ? red : c_acc[k];
      u_mask[k] = (ir.op == OP_FWD) ? a_rdata[sel] : a_rdata[k];
    end
    u_afn      = ir.afn;
    u_noise_en = (ir.op == OP_FWD) && ir.noise;
    for (int i = 0; i < ARR; i++) u_noise[i] = 32'($signed(r_rnd[i]) >>> nshift);
  end


  assign instr_ready = (st == S_IDLE);
  assign busy        = (st != S_IDLE);
  assign o_lr        = lr;
  assign o_w         = w_hold;
  assign o_g         = g_hold;
  assign q_mon_word  = u_y[0];

  // GRAD write-back address
  logic [16:0] gw_addr;
  assign gw_addr = 17'(ir.wbase) + 17'(gwi) * 17'(v_t) + 17'(gm);

  always_comb begin
    // defaults
    w_re = 1'b0; w_raddr = WADDR_W'(pre_addr);
    g_re = 1'b0; g_raddr = ir.wbase + ak;
    a_re = '0;
    for (int k = 0; k < N; k++) a_raddr[k] = '0;
    c_fire = '0;
    for (int k = 0; k < N; k++) c_act_word[k] = act_q[k];
    c_acc_clr = (st == S_OT) || (ir.op == OP_GRAD && st != S_IDLE);
    w_we = 1'b0; w_waddr = ir.wbase + ak; w_wdata = o_w_new;
    g_we = 1'b0; g_acc = 1'b0; g_waddr = ir.wbase + ak; g_wdata = '0;
    a_we = '0; a_waddr = ir.dst + AADDR_W'(ot);
    for (int k = 0; k < N; k++) a_wdata[k] = u_y[k];
    q_mon_en = 1'b0;
    r_en = 1'b0;
    o_start = 1'b0; o_addr = ir.wbase + ak;

    case (st)
      S_PRE: w_re = 1'b1;
      S_ACT: begin
        if (ir.op == OP_FWD) begin
          a_re[sel] = 1'b1;
          a_raddr[sel] = ir.src + AADDR_W'(it_base + 7'(kc));
        end else begin
          a_re = '1;
          for (int k = 0; k < N; k++) a_raddr[k] = ir.src + AADDR_W'(it_base);
        end
      end
      S_FIRE: begin
        for (int k = 0; k < N; k++)
          c_fire[k] = (ir.op == OP_BWD) || ((it_base + 7'(k)) < in_t);
      end
      S_RES: begin
        a_re = '1;
        for (int k = 0; k < N; k++) a_raddr[k] = ir.aux + AADDR_W'(ot);
      end
      S_WR: begin
        if (ir.op == OP_FWD) begin
          a_we[sel] = 1'b1;
          q_mon_en  = !q_frozen;
          r_en      = ir.noise;
        end else begin
          a_we = '1;
        end
      end
      S_GPRE: begin
        a_re = '1;
        for (int k = 0; k < N; k++) a_raddr[k] = (ir.wt_t ? ir.src : ir.aux) + AADDR_W'(gm);
      end
      S_GU: begin
        a_re = '1;
        for (int k = 0; k < N; k++) a_raddr[k] = (ir.wt_t ? ir.aux : ir.src) + AADDR_W'(gut);
      end
      S_GFIRE: begin
        c_fire = '1;
        for (int k = 0; k < N; k++)
          for (int i = 0; i < ARR; i++)
            c_act_word[k][i] = (5'(i) == gj) ? act_q[k][i] : 32'd0;
      end
      S_ARD: begin
        w_re = 1'b1; w_raddr = ir.wbase + ak;
        g_re = 1'b1;
      end
      S_AST: o_start = 1'b1;
      S_AWAIT: if (o_done) begin
        w_we = 1'b1;
        g_we = 1'b1;
      end
      default: ;
    endcase
    // GRAD results stream out of the cores while firing continues
    if (ir.op == OP_GRAD && c_acc_done && gout != 0) begin
      g_acc   = 1'b1;
      g_waddr = WADDR_W'(gw_addr);
      g_wdata = red;
    end
  end

  // pre-load word to the cores
  always_comb begin
    c_ld_en  = pl_v ? pl_core : '0;
    c_ld_col = pl_col;
    c_ld_all = pl_all;
    c_ld_idx = pl_idx;
    for (int k = 0; k < N; k++) begin
      if (pl_zero)     c_ld_word[k] = '0;
      else if (pl_act) c_ld_word[k] = unpack(a_rdata[k], ir.lane[0], q_frozen, q_s);
      else             c_ld_word[k] = w_rdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      ir <= '0;
      qdelay <= '0; lr <= 24'd1678; nshift <= 5'd8;
      timestep <= '0;
      ot <= '0; ot_n <= '0; it_base <= '0; in_t <= '0; kc <= '0; ii <= '0;
      gm <= '0; gut <= '0; gj <= '0; gwi <= '0; gout <= '0; ak <= '0;
      pl_v <= 1'b0; pl_col <= 1'b0; pl_all <= 1'b0; pl_zero <= 1'b0; pl_act <= 1'b0;
      pl_core <= '0; pl_idx <= '0;
      out_valid <= 1'b0; out_word <= '0;
      q_freeze <= 1'b0;
      w_hold <= '0; g_hold <= '0;
      rd_v <= 1'b0;
      rd_k <= '0;
      for (int k = 0; k < N; k++) act_q[k] <= '0;
    end else begin
      pl_v      <= 1'b0;
      out_valid <= 1'b0;
      rd_v      <= (st == S_ACT);
      rd_k      <= kc;
      q_freeze  <= 1'b0;

      // GRAD bookkeeping of results in flight
      if (ir.op == OP_GRAD && st != S_IDLE) begin
        if (c_acc_done && gout != 0) gwi <= gwi + 1'b1;
        gout <= gout + 11'(st == S_GFIRE) - 11'(c_acc_done && gout != 0);
      end

      case (st)
        S_IDLE: if (instr_valid) begin
          ir <= instr;
          ot <= '0;
          case (instr.op)
            OP_FWD, OP_BWD: begin
              st   <= S_OT;
              in_t <= 7'(tiles((instr.op == OP_BWD) ? instr.p : instr.q));
              ot_n <= 7'(tiles((instr.op == OP_BWD) ? instr.q : instr.p));
            end
            OP_GRAD: begin
              st <= S_GPRE; gm <= '0; gwi <= '0; gout <= '0;
            end
            OP_ADAM: begin
              st <= S_ARD; ak <= '0;
            end
            OP_CFG: begin
              qdelay <= instr.imm[63:32];
              lr     <= instr.imm[31:8];
              nshift <= instr.imm[4:0];
            end
            default: ;
          endcase
        end

        // ---------------- FWD / BWD ----------------
        S_OT: begin   // accumulators cleared in this cycle
          it_base <= '0;
          kc <= '0;
          ii <= '0;
          st <= S_PRE;
        end
        S_PRE: begin  // read weight word ii for core kc
          pl_v    <= 1'b1;
          pl_core <= (ir.op == OP_FWD) ? (N'(1) << kc) : '1;
          pl_col  <= pre_col;
          pl_all  <= 1'b0;
          pl_idx  <= ii[3:0];
          pl_zero <= !pre_ok;
          pl_act  <= 1'b0;
          ii <= ii + 1'b1;
          if (ii == 5'(ARR - 1)) begin
            ii <= '0;
            if (ir.op == OP_FWD && int'(kc) < N - 1 && (it_base + 7'(kc) + 7'd1) < in_t)
              kc <= kc + 1'b1;
            else begin
              kc <= '0;
              st <= S_ACT;
            end
          end
        end
        S_ACT: begin  // FWD: read one word per core from memory sel; BWD: all at once
          if (ir.op == OP_FWD && int'(kc) < N - 1) kc <= kc + 1'b1;
          else                                     st <= S_ACTW;
        end
        S_ACTW: st <= S_FIRE;   // last word captured
        S_FIRE: st <= S_WAIT;
        S_WAIT: if (c_acc_done) begin
          if (it_base + ((ir.op == OP_FWD) ? 7'(N) : 7'd1) < in_t) begin
            it_base <= it_base + ((ir.op == OP_FWD) ? 7'(N) : 7'd1);
            kc <= '0;
            st <= S_PRE;
          end else begin
            st <= S_RES;
          end
        end
        S_RES: st <= S_WR;   // mask words being read
        S_WR: begin
          if (ir.op == OP_FWD && ir.to_host) begin
            out_valid <= 1'b1;
            out_word  <= u_y[0];
          end
          if (ot + 1'b1 < ot_n) begin
            ot <= ot + 1'b1;
            st <= S_OT;
          end else begin
            st <= S_END;
          end
        end
        S_END: begin
          if (ir.op == OP_FWD && ir.step) begin
            timestep <= timestep + 1'b1;
            if (qdelay != 0 && timestep + 1 == qdelay && !q_frozen) q_freeze <= 1'b1;
          end
          st <= S_IDLE;
        end

        // ---------------- GRAD ----------------
        S_GPRE: st <= S_GPRE2;      // v word m being read from every core
        S_GPRE2: begin              // pre-load it into all rows of every core
          pl_v <= 1'b1; pl_core <= '1; pl_col <= 1'b0; pl_all <= 1'b1;
          pl_idx <= '0; pl_zero <= 1'b0; pl_act <= 1'b1;
          gut <= '0;
          st  <= S_GU;
        end
        S_GU: st <= S_GU2;          // u word being read
        S_GU2: begin
          gj <= '0;
          st <= S_GFIRE;
        end
        S_GFIRE: begin
          gj <= gj + 1'b1;
          if (gj == 5'(ARR - 1) || (11'(gut) * 11'(ARR) + 11'(gj) + 11'd1) >= 11'(u_len)) begin
            if (gut + 1'b1 < u_t) begin
              gut <= gut + 1'b1;
              st  <= S_GU;
            end else begin
              st <= S_GDRAIN;
            end
          end
        end
        S_GDRAIN: if (gout == 0 || (gout == 1 && c_acc_done)) begin
          if (gm + 1'b1 < v_t) begin
            gm  <= gm + 1'b1;
            gwi <= '0;
            st  <= S_GPRE;
          end else begin
            st <= S_IDLE;
          end
        end

        // ---------------- ADAM ----------------
        S_ARD: st <= S_AST;
        S_AST: begin
          w_hold <= w_rdata;
          g_hold <= g_rdata;
          st     <= S_AWAIT;
        end
        S_AWAIT: if (o_done) begin
          if (ak + 1'b1 < ir.nwords) begin
            ak <= ak + 1'b1;
            st <= S_ARD;
          end else begin
            st <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase

      // capture activation words read in the previous cycle
      if (rd_v) begin
        if (ir.op == OP_FWD) act_q[rd_k] <= a_rdata[sel];
        else for (int k = 0; k < N; k++) act_q[k] <= a_rdata[k];
      end
      if (st == S_GU2) for (int k = 0; k < N; k++) act_q[k] <= unpack(a_rdata[k], ir.lane[0], q_frozen, q_s);
    end
  end

endmodule

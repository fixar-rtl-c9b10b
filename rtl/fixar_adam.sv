// fixar_adam: Adam optimizer for the weight update, local to the accelerator.
//
// Works on one 512-bit word (16 weights) per start pulse. It keeps the first
// and second moments m and v of every weight in its own two moment memories
// (DEPTH words each, addressed like the weight memory); a reset marks all
// moments as zero through one valid bit per word. For each of the 16
// elements, in turn, with g the accumulated gradient (all Q16.16):
//   m' = m + (g - m) * (1 - beta1)          beta1 = 0.9   (C1 = 6554 / 2^16)
//   v' = v + (g*g - v) * (1 - beta2)        beta2 = 0.999 (C2 = 66 / 2^16)
//   r  = m' / (sqrt(v') + eps)              eps = 1 LSB
//   w' = w - lr * r                         lr in Q0.24 (10^-4 -> 1678)
// The square root (24 cycles, bit by bit) and the division (48 cycles,
// restoring, on magnitudes) are sequential, so one element takes about 75
// cycles and a word about 1200. done pulses for one cycle with w_out valid;
// the moments are written back at the same time. Inputs must stay stable
// from start to done.
// The paper states the Adam optimizer and the learning rate of 10^-4; the
// beta values are the usual Adam defaults, and the fixed-point formats,
// the sequential sqrt/divide and the omitted bias correction are this
// design's choices.
module fixar_adam
  import fixar_pkg::*;
#(
  parameter int unsigned DEPTH = WMEM_DEPTH,
  parameter int unsigned AW    = WADDR_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] addr,
  input  logic [23:0]   lr,
  input  word_t         w_in,
  input  word_t         g_in,
  output logic          busy,
  output logic          done,
  output word_t         w_out
);
  localparam logic signed [63:0] C1 = 64'sd429496730;
  localparam logic signed [63:0] C2 = 64'sd4294967;

  typedef enum logic [2:0] {S_IDLE, S_RD, S_MV, S_SQRT, S_DIV, S_UPD, S_WB} state_e;
  state_e st;

  word_t m_mem [DEPTH];
  word_t v_mem [DEPTH];
  logic [DEPTH-1:0] mv_ok;   // moments of a word hold data (reset: all zero)
  word_t m_w, v_w;
  logic [3:0] idx;
  logic [5:0] cnt;

  fx_t m_n, v_n;
  // square root
  logic [51:0] sq_rem_in;     // radicand v' << 20
  logic [27:0] sq_root;
  logic [53:0] sq_rem;
  // division
  logic [55:0] dv_num;
  logic [32:0] dv_den;
  logic [55:0] dv_q;
  logic [33:0] dv_rem;
  logic        neg;

  fx_t g_e, m_e, v_e, w_e;
  assign g_e = fx_t'(g_in[idx]);
  assign m_e = fx_t'(m_w[idx]);
  assign v_e = fx_t'(v_w[idx]);
  assign w_e = fx_t'(w_in[idx]);

  logic signed [63:0] gg, t1, t2, step, vv;
  logic        [31:0] v_sat;
  always_comb begin
    gg = 64'(g_e) * 64'(g_e);                             // Q.32
    t1 = ((64'(g_e) - 64'(m_e)) * C1) >>> 32;
    t2 = (((gg >>> 4) - 64'($unsigned(v_e))) * C2) >>> 32; // Q.28
    vv = 64'($unsigned(v_e)) + t2;
    v_sat = (vv < 0) ? 32'd0 : (vv > 64'sh0000_0000_ffff_ffff) ? 32'hffff_ffff : vv[31:0];
  end

  logic [53:0] sq_trial;
  assign sq_trial = 54'({sq_root, 2'b01});
  logic [33:0] dv_trial;
  assign dv_trial = {dv_rem[32:0], dv_num[55]} - {1'b0, dv_den};

  logic [55:0] q_sat;
  assign q_sat = (dv_q > 56'h00_0000_7fff_ffff) ? 56'h00_0000_7fff_ffff : dv_q;
  always_comb step = (64'(q_sat) * 64'(lr)) >>> 24;

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= S_IDLE;
      done  <= 1'b0;
      mv_ok <= '0;
      idx   <= '0;
      cnt   <= '0;
      w_out <= '0;
      m_w   <= '0;
      v_w   <= '0;
      m_n   <= '0;
      v_n   <= '0;
      sq_rem_in <= '0; sq_root <= '0; sq_rem <= '0;
      dv_num <= '0; dv_den <= '0; dv_q <= '0; dv_rem <= '0; neg <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          st  <= S_RD;
          idx <= '0;
        end
        S_RD: begin
          m_w <= mv_ok[addr] ? m_mem[addr] : '0;
          v_w <= mv_ok[addr] ? v_mem[addr] : '0;
          st  <= S_MV;
        end
        S_MV: begin
          m_n       <= m_e + fx_t'(t1);
          v_n       <= fx_t'(v_sat);
          sq_rem_in <= {v_sat, 20'd0};
          sq_root   <= '0;
          sq_rem    <= '0;
          cnt       <= '0;
          st        <= S_SQRT;
        end
        S_SQRT: begin
          // one result bit per cycle, two radicand bits shifted in
          logic [53:0] r2;
          r2 = {sq_rem[51:0], sq_rem_in[51:50]};
          sq_rem_in <= sq_rem_in << 2;
          if (r2 >= sq_trial) begin
            sq_rem  <= r2 - sq_trial;
            sq_root <= {sq_root[26:0], 1'b1};
          end else begin
            sq_rem  <= r2;
            sq_root <= {sq_root[26:0], 1'b0};
          end
          cnt <= cnt + 1'b1;
          if (cnt == 6'd25) begin
            st     <= S_DIV;
            cnt    <= '0;
            neg    <= m_n[31];
            dv_num <= {(m_n[31] ? 32'(-m_n) : 32'(m_n)), 24'd0};
            dv_q   <= '0;
            dv_rem <= '0;
          end
        end
        S_DIV: begin
          if (cnt == 6'd0) dv_den <= 33'(sq_root) + 33'd1;
          else begin
            if (!dv_trial[33]) begin
              dv_rem <= dv_trial;
              dv_q   <= {dv_q[54:0], 1'b1};
            end else begin
              dv_rem <= {dv_rem[32:0], dv_num[55]};
              dv_q   <= {dv_q[54:0], 1'b0};
            end
            dv_num <= dv_num << 1;
          end
          cnt <= cnt + 1'b1;
          if (cnt == 6'd56) st <= S_UPD;
        end
        S_UPD: begin
          w_out[idx] <= neg ? 32'(w_e + fx_t'(step)) : 32'(w_e - fx_t'(step));
          m_w[idx]   <= m_n;
          v_w[idx]   <= v_n;
          if (idx == 4'(ARR - 1)) st <= S_WB;
          else begin
            idx <= idx + 1'b1;
            st  <= S_MV;
          end
        end
        S_WB: begin
          m_mem[addr] <= m_w;
          v_mem[addr] <= v_w;
          mv_ok[addr] <= 1'b1;
          done        <= 1'b1;
          st          <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule

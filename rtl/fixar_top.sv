// fixar_top: the FIXAR fixed-point DRL accelerator.
//
// N adaptive array processing (AAP) cores, each with its own activation
// memory and activation unit, share one weight memory and one gradient
// memory. The control unit executes host instructions (see fixar_ctrl) that
// run forward propagation with intra-layer parallelism, back-propagation
// with intra-batch parallelism, gradient accumulation and the Adam weight
// update, and switches the datapath from 32-bit to 16-bit activations after
// the quantization delay (quantizer). The PRNG adds exploration noise to the
// actor's output.
//
// The host link of the paper (PCIe DMA and the FPGA shell) is not part of
// this RTL; its traffic appears as plain ports:
//   instruction stream:  instr_valid / instr_ready / instr
//   host_w_*:            write a weight word (weight initialisation)
//   host_a_*:            write / read a word of one core's activation memory
//                        (states, transitions, errors in; results out)
//   out_valid/out_word:  result words of OP_FWD with to_host (the actions)
// Host accesses to the memories are only allowed while busy is low; the
// control unit owns the memories while it runs. Reads return data one cycle
// after host_a_re. On the step that reaches the quantization delay,
// half_mode rises two cycles after busy falls.
// N = 2 cores is this design's choice (the paper leaves N open); the
// memory sizes, array size and the parallelism schemes follow the paper.
module fixar_top
  import fixar_pkg::*;
#(
  parameter int unsigned N = N_CORES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               instr_valid,
  output logic               instr_ready,
  input  instr_t             instr,
  output logic               busy,
  output logic [31:0]        timestep,
  output logic               half_mode,
  output logic [4:0]         q_shift,
  output fx_t                q_min,       // activation range seen by the monitor
  output fx_t                q_max,
  output logic               out_valid,
  output word_t              out_word,
  input  logic               host_w_we,
  input  logic [WADDR_W-1:0] host_w_addr,
  input  word_t              host_w_wdata,
  input  logic               host_a_we,
  input  logic               host_a_re,
  input  logic [1:0]         host_a_core,
  input  logic [AADDR_W-1:0] host_a_addr,
  input  word_t              host_a_wdata,
  output word_t              host_a_rdata
);
  // control unit side
  logic                w_re, w_we_c;
  logic [WADDR_W-1:0]  w_raddr, w_waddr_c;
  word_t               w_rdata, w_wdata_c;
  logic                g_re, g_we, g_acc;
  logic [WADDR_W-1:0]  g_raddr, g_waddr;
  word_t               g_rdata, g_wdata;
  logic [N-1:0]        a_re_c, a_we_c;
  logic [AADDR_W-1:0]  a_raddr_c [N];
  logic [AADDR_W-1:0]  a_waddr_c;
  word_t               a_rdata [N], a_wdata_c [N];
  logic                c_half, c_ld_col, c_ld_all, c_acc_clr;
  logic [N-1:0]        c_ld_en, c_fire, c_done;
  logic [3:0]          c_ld_idx;
  word_t               c_ld_word [N], c_act_word [N], c_acc [N];
  afn_e                u_afn;
  logic                u_noise_en;
  word_t               u_noise, u_x [N], u_mask [N], u_y [N];
  logic                q_mon_en, q_freeze, q_frozen;
  word_t               q_mon_word;
  logic                r_en;
  word_t               r_rnd;
  logic                o_start, o_busy, o_done;
  logic [WADDR_W-1:0]  o_addr;
  logic [23:0]         o_lr;
  word_t               o_w, o_g, o_w_new;

  fixar_ctrl #(.N(N)) u_ctrl (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr,
    .busy, .timestep, .out_valid, .out_word,
    .w_re, .w_raddr, .w_rdata, .w_we(w_we_c), .w_waddr(w_waddr_c), .w_wdata(w_wdata_c),
    .g_re, .g_raddr, .g_rdata, .g_we, .g_acc, .g_waddr, .g_wdata,
    .a_re(a_re_c), .a_raddr(a_raddr_c), .a_rdata, .a_we(a_we_c), .a_waddr(a_waddr_c),
    .a_wdata(a_wdata_c),
    .c_half, .c_ld_en, .c_ld_col, .c_ld_all, .c_ld_idx, .c_ld_word, .c_fire,
    .c_act_word, .c_acc_clr, .c_acc_done(c_done[0]), .c_acc,
    .u_afn, .u_noise_en, .u_noise, .u_x, .u_mask, .u_y,
    .q_mon_en, .q_mon_word, .q_freeze, .q_frozen, .q_s(q_shift),
    .r_en, .r_rnd,
    .o_start, .o_addr, .o_lr, .o_w, .o_g, .o_done, .o_w_new
  );

  // weight memory: the host writes only while the control unit is idle
  fixar_weight_mem u_wmem (
    .clk, .re(w_re), .raddr(w_raddr), .rdata(w_rdata),
    .we(busy ? w_we_c : host_w_we),
    .waddr(busy ? w_waddr_c : host_w_addr),
    .wdata(busy ? w_wdata_c : host_w_wdata)
  );

  fixar_grad_mem u_gmem (
    .clk, .rst_n, .re(g_re), .raddr(g_raddr), .rdata(g_rdata),
    .we(g_we), .acc(g_acc), .waddr(g_waddr), .wdata(g_wdata)
  );

  for (genvar k = 0; k < N; k++) begin : g_core
    logic host_sel;
    assign host_sel = !busy && (32'(host_a_core) == k);

    fixar_act_mem u_amem (
      .clk,
      .re   (busy ? a_re_c[k] : (host_sel && host_a_re)),
      .raddr(busy ? a_raddr_c[k] : host_a_addr),
      .rdata(a_rdata[k]),
      .we   (busy ? a_we_c[k] : (host_sel && host_a_we)),
      .waddr(busy ? a_waddr_c : host_a_addr),
      .wdata(busy ? a_wdata_c[k] : host_a_wdata)
    );

    fixar_aap_core u_core (
      .clk, .rst_n, .half(c_half),
      .ld_en(c_ld_en[k]), .ld_col(c_ld_col), .ld_all(c_ld_all), .ld_idx(c_ld_idx),
      .ld_word(c_ld_word[k]),
      .fire(c_fire[k]), .act_word(c_act_word[k]),
      .acc_clr(c_acc_clr), .acc_done(c_done[k]), .acc(c_acc[k])
    );

    fixar_act_unit u_act (
      .half(c_half), .s(q_shift), .afn(u_afn), .noise_en(u_noise_en), .noise(u_noise),
      .x(u_x[k]), .mask(u_mask[k]), .y(u_y[k])
    );
  end

  // host read data: the memory read on the previous cycle
  logic [1:0] host_rd_core;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         host_rd_core <= '0;
    else if (host_a_re) host_rd_core <= host_a_core;
  end
  always_comb begin
    host_a_rdata = '0;
    for (int k = 0; k < N; k++) if (32'(host_rd_core) == k) host_a_rdata = a_rdata[k];
  end

  fixar_quantizer u_quant (
    .clk, .rst_n, .mon_en(q_mon_en), .in_word(q_mon_word), .freeze(q_freeze),
    .frozen(q_frozen), .a_min(q_min), .a_max(q_max), .s(q_shift)
  );
  assign half_mode = q_frozen;

  fixar_prng u_prng (.clk, .rst_n, .en(r_en), .rnd(r_rnd));

  fixar_adam u_adam (
    .clk, .rst_n, .start(o_start), .addr(o_addr), .lr(o_lr), .w_in(o_w), .g_in(o_g),
    .busy(o_busy), .done(o_done), .w_out(o_w_new)
  );
endmodule

// fixar_aap_core: adaptive array processing (AAP) core.
//
// An activation line buffer, a 16x16 PE array and the accumulator below it.
// The core does not know whether it runs forward or backward propagation:
// the control unit chooses that by the orientation in which it pre-loads
// weights (ld_col) and by what it puts in the line buffer. Timing: after
// fire, the column sums of that activation word enter the accumulator on
// the clock edge ROWS + 1 cycles later, and acc_done pulses in the cycle
// after that edge, when acc holds the new sum. Fires may be issued on
// consecutive cycles. acc_clr zeroes the accumulator.
module fixar_aap_core
  import fixar_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 half,
  // weight pre-load
  input  logic                 ld_en,
  input  logic                 ld_col,
  input  logic                 ld_all,
  input  logic [3:0]           ld_idx,
  input  logic [ARR-1:0][31:0] ld_word,
  // activation broadcast
  input  logic                 fire,
  input  logic [ARR-1:0][31:0] act_word,
  // accumulator
  input  logic                 acc_clr,
  output logic                 acc_done,
  output logic [ARR-1:0][31:0] acc
);
  logic [ARR-1:0][31:0] act_row, psum;
  logic [ARR:0]         vpipe;   // fire delayed: bit k = fire k+1 cycles ago
  logic                 acc_en;

  fixar_line_buffer u_lb (.clk, .rst_n, .fire, .word_in(act_word), .act_row);

  fixar_pe_array u_arr (
    .clk, .rst_n, .half, .ld_en, .ld_col, .ld_all, .ld_idx, .ld_word,
    .act_row, .psum_out(psum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe    <= '0;
      acc_done <= 1'b0;
    end else begin
      vpipe    <= {vpipe[ARR-1:0], fire};
      acc_done <= acc_en;
    end
  end
  assign acc_en = vpipe[ARR];

  fixar_accumulator u_acc (
    .clk, .rst_n, .half, .clr(acc_clr), .en(acc_en), .psum_in(psum), .acc
  );
endmodule

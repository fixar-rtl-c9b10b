// fixar_line_buffer: the 512-bit activation line buffer of an AAP core.
//
// A load (fire) captures one 512-bit word, 16 activation slots, from the
// activation memory. Slot r is broadcast to every PE of array row r. Because
// partial sums move down the array one row per cycle, row r must see its
// activation r cycles after row 0: the buffer therefore presents slot r on
// act_row[r] exactly 1 + r cycles after the load and drives zero on every
// other cycle, so idle cycles push zeros through the array. Loads may come
// back to back, one per cycle.
// The 512-bit width and the row broadcast are the paper's; the skewed
// presentation is this design's way of pipelining the array.
module fixar_line_buffer
  import fixar_pkg::*;
#(
  parameter int unsigned ROWS = ARR
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  fire,
  input  logic [ROWS-1:0][31:0] word_in,
  output logic [ROWS-1:0][31:0] act_row
);
  logic [ROWS-1:0][31:0] buf_q;
  // skew[r][k]: slot r delayed by k further cycles
  logic [ROWS-1:0][ROWS-1:0][31:0] skew;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0;
      skew  <= '0;
    end else begin
      buf_q <= fire ? word_in : '0;
      for (int r = 0; r < ROWS; r++) begin
        skew[r][0] <= buf_q[r];
        for (int k = 1; k < ROWS; k++) skew[r][k] <= skew[r][k-1];
      end
    end
  end

  always_comb begin
    act_row[0] = buf_q[0];
    for (int r = 1; r < ROWS; r++) act_row[r] = skew[r][r-1];
  end
endmodule

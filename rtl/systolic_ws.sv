// systolic_ws: weight-stationary systolic array of ROWS x COLS multiply-
// accumulate processing elements, the compute core of FPGA.GEMM (8 x 8 and
// weight-stationary in the paper; the PE-level timing is this design's own).
//
// Each PE(i,j) holds one weight w(i,j). Activations enter row i on the left
// (a_in[i]) and move one PE to the right per cycle; partial sums enter each
// column at the top as zero and move one PE down per cycle, each PE adding
// a * w. With row i fed A[m][i] in cycle m + i (a skewed wavefront),
// column j delivers sum_i A[m][i] * w(i,j) on psum_out[j] in cycle m + ROWS + j.
//
// Weights are loaded one row per cycle: with w_load high, row w_row takes
// w_data[0..COLS-1]. Operands are signed 16 bit (Q8.8 activations, Q12.4
// weights); sums are ACC_W bits wide.
module systolic_ws #(
  parameter int unsigned ROWS  = 8,
  parameter int unsigned COLS  = 8,
  parameter int unsigned ACC_W = 48
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_load,
  input  logic [$clog2(ROWS)-1:0]  w_row,
  input  logic signed [15:0]       w_data [COLS],
  input  logic signed [15:0]       a_in   [ROWS],
  output logic signed [ACC_W-1:0]  psum_out [COLS]
);
  logic signed [15:0]      w_q [ROWS][COLS];
  logic signed [15:0]      a_q [ROWS][COLS];
  logic signed [ACC_W-1:0] p_q [ROWS][COLS];

  // inputs of each PE: activation from the left, partial sum from above
  logic signed [15:0]      a_nx  [ROWS][COLS];
  logic signed [ACC_W-1:0] p_nx  [ROWS][COLS];
  always_comb begin
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        a_nx[i][j] = (j == 0) ? a_in[i] : a_q[i][j-1];
        p_nx[i][j] = ((i == 0) ? '0 : p_q[i-1][j]) + ACC_W'(32'(a_nx[i][j] * w_q[i][j]));
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          w_q[i][j] <= '0;
          a_q[i][j] <= '0;
          p_q[i][j] <= '0;
        end
    end else begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          a_q[i][j] <= a_nx[i][j];
          p_q[i][j] <= p_nx[i][j];
          if (w_load && w_row == i[$clog2(ROWS)-1:0]) w_q[i][j] <= w_data[j];
        end
    end
  end

  for (genvar j = 0; j < COLS; j++) begin : g_out
    assign psum_out[j] = p_q[ROWS-1][j];
  end

endmodule

// systolic_os: output-stationary systolic array of ROWS x COLS processing
// elements, the compute core of FPGA.VCONV (4 x 4 = 16 PEs, one DSP slice
// each, in the paper; the dataflow choice is this design's own).
//
// PE(i,j) keeps its own accumulator. Operand a enters row i on the left and
// moves one PE right per cycle; operand b enters column j at the top and
// moves one PE down per cycle; each PE adds a * b to its accumulator. Inputs
// must be skewed by the caller: row i and column j carry reduction step k in
// cycle k + i and k + j respectively, so PE(i,j) sees step k in cycle
// k + i + j and holds sum_k a_i[k] * b_j[k] from cycle R + i + j on (R steps).
// `clear` zeroes all accumulators and operand registers. Operands are signed
// 16 bit, accumulators ACC_W bits.
module systolic_os #(
  parameter int unsigned ROWS  = 4,
  parameter int unsigned COLS  = 4,
  parameter int unsigned ACC_W = 48
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic signed [15:0]       a_in [ROWS],
  input  logic signed [15:0]       b_in [COLS],
  output logic signed [ACC_W-1:0]  acc  [ROWS][COLS]
);
  logic signed [15:0]      a_q [ROWS][COLS];
  logic signed [15:0]      b_q [ROWS][COLS];
  logic signed [ACC_W-1:0] acc_q [ROWS][COLS];

  // inputs of each PE: a from the left, b from above
  logic signed [15:0] a_nx [ROWS][COLS];
  logic signed [15:0] b_nx [ROWS][COLS];
  logic signed [31:0] prod [ROWS][COLS];
  always_comb begin
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        a_nx[i][j] = (j == 0) ? a_in[i] : a_q[i][j-1];
        b_nx[i][j] = (i == 0) ? b_in[j] : b_q[i-1][j];
        prod[i][j] = a_nx[i][j] * b_nx[i][j];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          a_q[i][j] <= '0; b_q[i][j] <= '0; acc_q[i][j] <= '0;
        end
    end else if (clear) begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          a_q[i][j] <= '0; b_q[i][j] <= '0; acc_q[i][j] <= '0;
        end
    end else begin
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) begin
          a_q[i][j]   <= a_nx[i][j];
          b_q[i][j]   <= b_nx[i][j];
          acc_q[i][j] <= acc_q[i][j] + ACC_W'(prod[i][j]);
        end
    end
  end

  assign acc = acc_q;

endmodule

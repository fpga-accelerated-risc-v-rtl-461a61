// act_lane: one of the FPGA.RELU unit's 16 parallel activation units.
//
// Input and output are Q8.8. The four functions are the ones the paper
// lists; the exact shapes are this design's own choice:
//   func 0  ReLU       y = max(x, 0)
//   func 1  ReLU6      y = min(max(x, 0), 6.0)
//   func 2  LeakyReLU  y = x for x >= 0, x/8 (arithmetic shift by 3) otherwise
//   func 3  GELU       y = table[(x + 4.0) * 32] for -4 <= x < 4,
//                      x for x >= 4, 0 for x < -4
// The GELU table has 256 entries as in the paper; entry i holds
// round(256 * g * Phi(g)) with g = -4 + i/32 and Phi the standard normal CDF,
// i.e. GELU sampled on a 1/32 grid (read from gelu_lut.hex). Purely
// combinational.
module act_lane (
  input  logic [1:0]         func,
  input  logic signed [15:0] x,
  output logic signed [15:0] y
);
  localparam logic signed [15:0] SIX = 16'sh0600;   // 6.0 in Q8.8

  logic [15:0] lut [256];
  initial $readmemh("rtl/gelu_lut.hex", lut);

  logic [7:0]  idx;
  logic [15:0] xo;
  assign xo  = x + 16'sd1024;          // x + 4.0
  assign idx = xo[10:3];

  always_comb begin
    unique case (func)
      2'd0: y = (x < 0) ? 16'sd0 : x;
      2'd1: y = (x < 0) ? 16'sd0 : (x > SIX) ? SIX : x;
      2'd2: y = (x < 0) ? (x >>> 3) : x;
      default: begin
        if (x >= 16'sd1024)       y = x;
        else if (x < -16'sd1024)  y = 16'sd0;
        else                      y = lut[idx];
      end
    endcase
  end

endmodule

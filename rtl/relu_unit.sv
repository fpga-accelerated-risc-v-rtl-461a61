// relu_unit: the FPGA.RELU accelerator, "fpga.relu rd, rs1, rs2".
//
// Applies an activation function to a vector of Q8.8 elements in memory:
// rs1 holds the input address, rd the output address, rs2[19:0] the element
// count, and funct7[1:0] selects the function (0 ReLU, 1 ReLU6, 2 LeakyReLU,
// 3 GELU; see act_lane). The paper gives the 16 parallel activation units,
// the 256-entry tables and the four functions; the operand meaning of rs2
// and funct7 and the chunked schedule below are this design's own.
//
// The vector is processed in chunks of LANES (16) elements. For each chunk
// the unit reads the elements through the shared DMA into the lane input
// registers, evaluates all lanes in parallel in one cycle, registers the
// results, and writes them back through the DMA. `done` pulses once the last
// chunk has been written. Input and output may be the same buffer.
module relu_unit
  import soc_pkg::*;
#(
  parameter int unsigned LANES = 16   // paper: 16 parallel activation units
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] dst_addr,
  input  logic [31:0] src_addr,
  input  logic [19:0] n_elem,
  input  logic [1:0]  func,
  output logic        busy,
  output logic        done,
  // shared DMA client port
  output logic        dma_cmd_valid,
  input  logic        dma_cmd_ready,
  output dma_cmd_t    dma_cmd,
  input  logic        dma_rd_valid,
  input  logic [15:0] dma_rd_data,
  output logic        dma_rd_ready,
  output logic        dma_wr_valid,
  output logic [15:0] dma_wr_data,
  input  logic        dma_wr_ready,
  input  logic        dma_done
);
  localparam int unsigned LW = $clog2(LANES + 1);

  typedef enum logic [2:0] {R_IDLE, R_RDCMD, R_LOAD, R_EVAL, R_WRCMD, R_STORE, R_WAIT, R_DONE} rstate_e;
  rstate_e state;

  logic [31:0] src_q, dst_q;
  logic [19:0] left_q;
  logic [1:0]  func_q;
  logic [LW-1:0] chunk, cnt;

  logic signed [15:0] xin [LANES];
  logic signed [15:0] yout [LANES];
  logic signed [15:0] yreg [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    act_lane u_lane (.func(func_q), .x(xin[l]), .y(yout[l]));
  end

  assign chunk = (left_q >= 20'(LANES)) ? LW'(LANES) : LW'(left_q);
  assign busy  = (state != R_IDLE);
  assign done  = (state == R_DONE);

  always_comb begin
    dma_cmd_valid = (state == R_RDCMD) || (state == R_WRCMD);
    dma_cmd.write = (state == R_WRCMD);
    dma_cmd.addr  = (state == R_WRCMD) ? dst_q : src_q;
    dma_cmd.n_elem = 20'(chunk);
    dma_rd_ready  = (state == R_LOAD);
    dma_wr_valid  = (state == R_STORE) && (cnt < chunk);
    dma_wr_data   = yreg[cnt[$clog2(LANES)-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= R_IDLE;
      src_q  <= '0;
      dst_q  <= '0;
      left_q <= '0;
      func_q <= '0;
      cnt    <= '0;
      for (int l = 0; l < LANES; l++) begin
        xin[l]  <= '0;
        yreg[l] <= '0;
      end
    end else begin
      unique case (state)
        R_IDLE: if (start) begin
          src_q  <= src_addr;
          dst_q  <= dst_addr;
          left_q <= n_elem;
          func_q <= func;
          state  <= (n_elem == 20'd0) ? R_DONE : R_RDCMD;
        end
        R_RDCMD: if (dma_cmd_ready) begin
          cnt   <= '0;
          for (int l = 0; l < LANES; l++) xin[l] <= '0;
          state <= R_LOAD;
        end
        R_LOAD: begin
          if (dma_rd_valid) begin
            xin[cnt[$clog2(LANES)-1:0]] <= dma_rd_data;
            cnt <= cnt + LW'(1);
          end
          if (dma_done) state <= R_EVAL;
        end
        R_EVAL: begin
          for (int l = 0; l < LANES; l++) yreg[l] <= yout[l];
          state <= R_WRCMD;
        end
        R_WRCMD: if (dma_cmd_ready) begin
          cnt   <= '0;
          state <= R_STORE;
        end
        R_STORE: begin
          if (dma_wr_valid && dma_wr_ready) cnt <= cnt + LW'(1);
          if (dma_done) state <= R_WAIT;
        end
        R_WAIT: begin
          src_q  <= src_q + 32'(2 * LANES);
          dst_q  <= dst_q + 32'(2 * LANES);
          left_q <= left_q - 20'(chunk);
          state  <= (left_q == 20'(chunk)) ? R_DONE : R_RDCMD;
        end
        R_DONE: state <= R_IDLE;
        default: state <= R_IDLE;
      endcase
    end
  end

endmodule

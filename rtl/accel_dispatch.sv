// accel_dispatch: the accelerator overlay. It takes one FPGA.* instruction at
// a time from the core, starts the accelerator its funct3 selects, gives that
// accelerator the shared DMA, and reports completion back to the core.
//
// The four instructions and their operands are the paper's; the handshake is
// this design's own. The core presents acc_valid with the decoded command;
// the dispatcher accepts it (acc_ready, only while idle), pulses the selected
// unit's start, and when the unit signals done it pulses acc_done for one
// cycle, so the core's instruction retires, together with dcache_inval so the
// core's write-through data cache drops any line the accelerator may have
// overwritten. Operand routing:
//   VCONV   rd = output, rs1 = input, rs2 = kernel, rs3 = configuration
//   GEMM    rd = C, rs1 = A, rs2 = B, rs3 = sizes (M, N, K)
//   RELU    rd = output, rs1 = input, rs2 = element count, funct7[1:0] = function
//   CUSTOM  rd = output, rs1 = input, rs2 = parameter block, funct7 = operation
// The dispatcher also counts, per instruction, how many were executed, and
// the cycles the overlay was busy; the accelerator register block exposes
// these counters.
module accel_dispatch
  import soc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // from the core
  input  logic        acc_valid,
  input  acc_cmd_t    acc_cmd,
  output logic        acc_ready,
  output logic        acc_done,
  output logic        dcache_inval,
  // status
  output logic        busy,
  output logic [31:0] count [4],     // VCONV, GEMM, RELU, CUSTOM
  output logic [31:0] busy_cycles,
  output logic [31:0] mac_cycles,    // systolic array streaming cycles
  output logic [31:0] errors,
  // AXI4 master of the shared DMA
  output axi_req_t    axi_req,
  input  axi_rsp_t    axi_rsp
);
  typedef enum logic [1:0] {D_IDLE, D_RUN, D_DONE} dstate_e;
  dstate_e state;
  acc_op_e op_q;

  // per-unit DMA client signals, index 0 VCONV, 1 GEMM, 2 RELU, 3 CUSTOM
  logic        u_start [4];
  logic        u_busy  [4];
  logic        u_done  [4];
  logic        u_err   [4];
  logic        u_cmd_valid [4];
  dma_cmd_t    u_cmd   [4];
  logic        u_rd_ready [4];
  logic        u_wr_valid [4];
  logic [15:0] u_wr_data  [4];

  logic        d_cmd_valid, d_cmd_ready, d_rd_valid, d_rd_ready, d_wr_valid, d_wr_ready, d_done;
  dma_cmd_t    d_cmd;
  logic [15:0] d_rd_data, d_wr_data;

  logic [1:0] sel;
  always_comb begin
    unique case (op_q)
      ACC_VCONV: sel = 2'd0;
      ACC_GEMM:  sel = 2'd1;
      ACC_RELU:  sel = 2'd2;
      default:   sel = 2'd3;
    endcase
  end

  acc_cmd_t    cmd_q;
  logic        go;
  logic        started;
  logic [31:0] vconv_mac, gemm_mac;
  assign acc_ready = (state == D_IDLE);
  assign go        = acc_valid && acc_ready;

  always_comb begin
    for (int u = 0; u < 4; u++) u_start[u] = 1'b0;
    if (state == D_RUN && !u_busy[sel] && !u_done[sel] && !started) u_start[sel] = 1'b1;
  end

  vconv_unit u_vconv (
    .clk, .rst_n, .start(u_start[0]),
    .dst_addr(cmd_q.rd_val), .in_addr(cmd_q.rs1_val), .w_addr(cmd_q.rs2_val), .cfg(cmd_q.rs3_val),
    .busy(u_busy[0]), .done(u_done[0]), .error(u_err[0]), .mac_cycles(vconv_mac),
    .dma_cmd_valid(u_cmd_valid[0]), .dma_cmd_ready(d_cmd_ready && sel == 2'd0), .dma_cmd(u_cmd[0]),
    .dma_rd_valid(d_rd_valid && sel == 2'd0), .dma_rd_data(d_rd_data), .dma_rd_ready(u_rd_ready[0]),
    .dma_wr_valid(u_wr_valid[0]), .dma_wr_data(u_wr_data[0]), .dma_wr_ready(d_wr_ready && sel == 2'd0),
    .dma_done(d_done && sel == 2'd0)
  );

  gemm_unit u_gemm (
    .clk, .rst_n, .start(u_start[1]),
    .dst_addr(cmd_q.rd_val), .a_addr(cmd_q.rs1_val), .b_addr(cmd_q.rs2_val), .cfg(cmd_q.rs3_val),
    .busy(u_busy[1]), .done(u_done[1]), .error(u_err[1]), .mac_cycles(gemm_mac),
    .dma_cmd_valid(u_cmd_valid[1]), .dma_cmd_ready(d_cmd_ready && sel == 2'd1), .dma_cmd(u_cmd[1]),
    .dma_rd_valid(d_rd_valid && sel == 2'd1), .dma_rd_data(d_rd_data), .dma_rd_ready(u_rd_ready[1]),
    .dma_wr_valid(u_wr_valid[1]), .dma_wr_data(u_wr_data[1]), .dma_wr_ready(d_wr_ready && sel == 2'd1),
    .dma_done(d_done && sel == 2'd1)
  );

  relu_unit u_relu (
    .clk, .rst_n, .start(u_start[2]),
    .dst_addr(cmd_q.rd_val), .src_addr(cmd_q.rs1_val), .n_elem(cmd_q.rs2_val[19:0]),
    .func(cmd_q.funct7[1:0]),
    .busy(u_busy[2]), .done(u_done[2]),
    .dma_cmd_valid(u_cmd_valid[2]), .dma_cmd_ready(d_cmd_ready && sel == 2'd2), .dma_cmd(u_cmd[2]),
    .dma_rd_valid(d_rd_valid && sel == 2'd2), .dma_rd_data(d_rd_data), .dma_rd_ready(u_rd_ready[2]),
    .dma_wr_valid(u_wr_valid[2]), .dma_wr_data(u_wr_data[2]), .dma_wr_ready(d_wr_ready && sel == 2'd2),
    .dma_done(d_done && sel == 2'd2)
  );
  assign u_err[2] = 1'b0;

  custom_unit u_custom (
    .clk, .rst_n, .start(u_start[3]),
    .dst_addr(cmd_q.rd_val), .src_addr(cmd_q.rs1_val), .prm_addr(cmd_q.rs2_val),
    .funct7(cmd_q.funct7),
    .busy(u_busy[3]), .done(u_done[3]), .error(u_err[3]),
    .dma_cmd_valid(u_cmd_valid[3]), .dma_cmd_ready(d_cmd_ready && sel == 2'd3), .dma_cmd(u_cmd[3]),
    .dma_rd_valid(d_rd_valid && sel == 2'd3), .dma_rd_data(d_rd_data), .dma_rd_ready(u_rd_ready[3]),
    .dma_wr_valid(u_wr_valid[3]), .dma_wr_data(u_wr_data[3]), .dma_wr_ready(d_wr_ready && sel == 2'd3),
    .dma_done(d_done && sel == 2'd3)
  );

  // the shared DMA follows the running unit
  assign d_cmd_valid = u_cmd_valid[sel];
  assign d_cmd       = u_cmd[sel];
  assign d_rd_ready  = u_rd_ready[sel];
  assign d_wr_valid  = u_wr_valid[sel];
  assign d_wr_data   = u_wr_data[sel];

  dma_engine u_dma (
    .clk, .rst_n,
    .cmd_valid(d_cmd_valid), .cmd_ready(d_cmd_ready), .cmd(d_cmd),
    .rd_valid(d_rd_valid), .rd_data(d_rd_data), .rd_ready(d_rd_ready),
    .wr_valid(d_wr_valid), .wr_data(d_wr_data), .wr_ready(d_wr_ready),
    .done(d_done), .axi_req, .axi_rsp
  );

  assign acc_done     = (state == D_DONE);
  assign dcache_inval = (state == D_DONE);
  assign busy         = (state != D_IDLE);
  assign mac_cycles   = vconv_mac + gemm_mac;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= D_IDLE;
      op_q        <= ACC_VCONV;
      cmd_q       <= '0;
      started     <= 1'b0;
      busy_cycles <= '0;
      errors      <= '0;
      for (int u = 0; u < 4; u++) count[u] <= '0;
    end else begin
      if (state != D_IDLE) busy_cycles <= busy_cycles + 32'd1;
      unique case (state)
        D_IDLE: if (go) begin
          cmd_q   <= acc_cmd;
          op_q    <= acc_cmd.op;
          started <= 1'b0;
          state   <= D_RUN;
        end
        D_RUN: begin
          if (u_start[sel]) started <= 1'b1;
          if (u_done[sel]) begin
            count[sel] <= count[sel] + 32'd1;
            if (u_err[sel]) errors <= errors + 32'd1;
            state <= D_DONE;
          end
        end
        D_DONE: state <= D_IDLE;
        default: state <= D_IDLE;
      endcase
    end
  end

  // Exactly one unit may run at a time.
  assert property (@(posedge clk) disable iff (!rst_n)
    $countones({u_busy[0], u_busy[1], u_busy[2], u_busy[3]}) <= 1);

endmodule

// custom_unit: the FPGA.CUSTOM accelerator, "fpga.custom rd, rs1, rs2, funct7".
//
// The paper describes FPGA.CUSTOM as an escape hatch whose 7-bit function
// code selects one of up to 128 specialised operations, and names batch
// normalisation, depthwise separable convolution and non-maximum suppression
// as examples without describing any of them. This unit implements two of
// them, with operand layouts of this design's own: function code 0, batch
// normalisation in inference form with per-tensor parameters (quantisation in
// the paper is per-tensor), and function code 1, depthwise convolution (the
// spatial half of a depthwise separable convolution; its pointwise half is an
// FPGA.GEMM). Non-maximum suppression and the other codes complete at once
// and raise `error`.
//
// Batch normalisation, y = sat(((x * gamma) >>> 8) + beta), all Q8.8:
//   rs1  input address, rd output address,
//   rs2  address of a two-word parameter block: word 0 = element count,
//        word 1 = {beta[15:0] in bits 31:16, gamma[15:0] in bits 15:0}.
// The unit reads the parameter block through the shared DMA, then processes
// the vector in chunks of CHUNK elements: read a chunk (each element is
// transformed as it arrives), write it back. `done` pulses at the end.
//
// Depthwise convolution, out[h][w][c] = sum_{kh,kw} in[h*S+kh-P][w*S+kw-P][c]
//   * ker[kh][kw][c], input and output Q8.8 in HWC layout, kernel Q12.4:
//   rs1  input address, rd output address,
//   rs2  address of a parameter block: word 0 = configuration, laid out like
//        the FPGA.VCONV one ([5:0] H, [11:6] W, [17:12] C, [26:24] K,
//        [28:27] S with 0 taken as 1, [31:29] P; bits 23:18 unused), followed
//        by the K*K*C kernel elements, [kh][kw][c].
// The kernel and the whole input are read into local buffers (KBUF_DEPTH and
// IBUF_DEPTH elements); then one multiply-accumulate per cycle computes the
// outputs in HWC order, K*K cycles each, and each result, shifted right by 4
// and saturated to Q8.8, goes straight to one DMA write of the whole output.
// Input positions in the padding read as zero. Configurations that do not
// fit the buffers, or are degenerate, raise `error` and write nothing.
module custom_unit
  import soc_pkg::*;
#(
  parameter int unsigned CHUNK      = 16,
  parameter int unsigned IBUF_DEPTH = 4096,   // depthwise input, elements (assumed)
  parameter int unsigned KBUF_DEPTH = 1024    // depthwise kernel, elements (assumed)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] dst_addr,
  input  logic [31:0] src_addr,
  input  logic [31:0] prm_addr,
  input  logic [6:0]  funct7,
  output logic        busy,
  output logic        done,
  output logic        error,
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
  localparam int unsigned CW = $clog2(CHUNK + 1);

  localparam int unsigned IAW = $clog2(IBUF_DEPTH);
  localparam int unsigned KAW = $clog2(KBUF_DEPTH);

  typedef enum logic [4:0] {C_IDLE, C_PRM_CMD, C_PRM, C_RD_CMD, C_RD, C_WR_CMD, C_WR, C_NEXT,
                            C_DW_CFG_CMD, C_DW_CFG, C_DW_CHK, C_DW_KER_CMD, C_DW_KER,
                            C_DW_IN_CMD, C_DW_IN, C_DW_OUT_CMD, C_DW_MAC, C_DW_WAIT,
                            C_DONE} cstate_e;
  cstate_e state;

  logic [31:0] src_q, dst_q, prm_q;
  logic [31:0] left_q;
  logic [15:0] gamma, beta;
  logic [1:0]  pcnt;
  logic [CW-1:0] cnt, chunk;
  logic        err_q;
  logic signed [15:0] buf_q [CHUNK];

  // depthwise convolution state
  logic [31:0] dcfg;
  logic [5:0]  dH, dW, dC, ch;
  logic [2:0]  dK, dS, dP, kh, kw;
  logic [7:0]  HO, WO, oh, ow;
  logic [19:0] ld_idx;
  logic        fin;
  logic signed [47:0] acc;
  logic signed [15:0] ibuf [IBUF_DEPTH];
  logic signed [15:0] kbuf [KBUF_DEPTH];
  logic [2:0]  s_eff;
  logic [19:0] n_in, n_ker, n_out;
  logic        dw_bad;
  logic signed [11:0] iy, ix;
  logic        in_img;
  logic [19:0] in_addr, k_addr;
  logic signed [31:0] prod;

  assign s_eff = (dcfg[28:27] == 2'd0) ? 3'd1 : {1'b0, dcfg[28:27]};
  always_comb begin
    n_in   = 20'(dH) * 20'(dW) * 20'(dC);
    n_ker  = 20'(dK) * 20'(dK) * 20'(dC);
    n_out  = 20'(HO) * 20'(WO) * 20'(dC);
    dw_bad = (dK == 3'd0) || (dC == 6'd0) || (dH == 6'd0) || (dW == 6'd0) ||
             (7'(dH) + 7'(2 * dP) < 7'(dK)) || (7'(dW) + 7'(2 * dP) < 7'(dK)) ||
             (n_in > 20'(IBUF_DEPTH)) || (n_ker > 20'(KBUF_DEPTH));
    iy      = 12'(oh) * 12'(dS) + 12'(kh) - 12'(dP);
    ix      = 12'(ow) * 12'(dS) + 12'(kw) - 12'(dP);
    in_img  = (iy >= 0) && (iy < 12'(dH)) && (ix >= 0) && (ix < 12'(dW));
    in_addr = (20'(iy[9:0]) * 20'(dW) + 20'(ix[9:0])) * 20'(dC) + 20'(ch);
    k_addr  = (20'(kh) * 20'(dK) + 20'(kw)) * 20'(dC) + 20'(ch);
    prod    = in_img ? 32'(ibuf[in_addr[IAW-1:0]]) * 32'(kbuf[k_addr[KAW-1:0]]) : 32'sd0;
  end

  assign chunk = (left_q >= 32'(CHUNK)) ? CW'(CHUNK) : CW'(left_q);
  assign busy  = (state != C_IDLE);
  assign done  = (state == C_DONE);
  assign error = (state == C_DONE) && err_q;

  // y = sat(((x * gamma) >>> 8) + beta)
  function automatic logic signed [15:0] bn(input logic signed [15:0] x,
                                            input logic signed [15:0] g,
                                            input logic signed [15:0] b);
    logic signed [31:0] p;
    logic signed [32:0] s;
    p = x * g;
    s = 33'(p >>> 8) + 33'(b);
    if (s > 33'sd32767)       return 16'sh7FFF;
    else if (s < -33'sd32768) return 16'sh8000;
    else                      return s[15:0];
  endfunction

  always_comb begin
    dma_cmd_valid = (state == C_PRM_CMD) || (state == C_RD_CMD) || (state == C_WR_CMD) ||
                    (state == C_DW_CFG_CMD) || (state == C_DW_KER_CMD) ||
                    (state == C_DW_IN_CMD) || (state == C_DW_OUT_CMD);
    dma_cmd.write = (state == C_WR_CMD) || (state == C_DW_OUT_CMD);
    unique case (state)
      C_PRM_CMD:    begin dma_cmd.addr = prm_q;          dma_cmd.n_elem = 20'd4; end
      C_RD_CMD:     begin dma_cmd.addr = src_q;          dma_cmd.n_elem = 20'(chunk); end
      C_DW_CFG_CMD: begin dma_cmd.addr = prm_q;          dma_cmd.n_elem = 20'd2; end
      C_DW_KER_CMD: begin dma_cmd.addr = prm_q + 32'd4;  dma_cmd.n_elem = n_ker; end
      C_DW_IN_CMD:  begin dma_cmd.addr = src_q;          dma_cmd.n_elem = n_in; end
      C_DW_OUT_CMD: begin dma_cmd.addr = dst_q;          dma_cmd.n_elem = n_out; end
      default:      begin dma_cmd.addr = dst_q;          dma_cmd.n_elem = 20'(chunk); end
    endcase
    dma_rd_ready = (state == C_PRM) || (state == C_RD) || (state == C_DW_CFG) ||
                   (state == C_DW_KER) || (state == C_DW_IN);
    dma_wr_valid = ((state == C_WR) && (cnt < chunk)) || ((state == C_DW_MAC) && fin);
    dma_wr_data  = (state == C_DW_MAC) ? sat_q88(acc) : buf_q[cnt[$clog2(CHUNK)-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      {src_q, dst_q, prm_q, left_q} <= '0;
      {gamma, beta} <= '0;
      pcnt  <= '0;
      cnt   <= '0;
      err_q <= 1'b0;
      for (int i = 0; i < CHUNK; i++) buf_q[i] <= '0;
      dcfg  <= '0;
      {dH, dW, dC, ch} <= '0;
      {dK, dS, dP, kh, kw} <= '0;
      {HO, WO, oh, ow} <= '0;
      ld_idx <= '0;
      fin   <= 1'b0;
      acc   <= '0;
    end else begin
      unique case (state)
        C_IDLE: if (start) begin
          src_q <= src_addr;
          dst_q <= dst_addr;
          prm_q <= prm_addr;
          err_q <= (funct7 > 7'd1);
          state <= (funct7 == 7'd0) ? C_PRM_CMD : (funct7 == 7'd1) ? C_DW_CFG_CMD : C_DONE;
        end
        C_PRM_CMD: if (dma_cmd_ready) begin pcnt <= '0; state <= C_PRM; end
        C_PRM: begin
          if (dma_rd_valid) begin
            unique case (pcnt)
              2'd0: left_q[15:0]  <= dma_rd_data;
              2'd1: left_q[31:16] <= dma_rd_data;
              2'd2: gamma <= dma_rd_data;
              default: beta <= dma_rd_data;
            endcase
            pcnt <= pcnt + 2'd1;
          end
          if (dma_done) state <= (left_q == 32'd0) ? C_DONE : C_RD_CMD;
        end
        C_RD_CMD: if (dma_cmd_ready) begin cnt <= '0; state <= C_RD; end
        C_RD: begin
          if (dma_rd_valid) begin
            buf_q[cnt[$clog2(CHUNK)-1:0]] <= bn(dma_rd_data, gamma, beta);
            cnt <= cnt + CW'(1);
          end
          if (dma_done) state <= C_WR_CMD;
        end
        C_WR_CMD: if (dma_cmd_ready) begin cnt <= '0; state <= C_WR; end
        C_WR: begin
          if (dma_wr_valid && dma_wr_ready) cnt <= cnt + CW'(1);
          if (dma_done) state <= C_NEXT;
        end
        C_NEXT: begin
          src_q  <= src_q + 32'(2 * CHUNK);
          dst_q  <= dst_q + 32'(2 * CHUNK);
          left_q <= left_q - 32'(chunk);
          state  <= (left_q == 32'(chunk)) ? C_DONE : C_RD_CMD;
        end
        // ---------------------------------------------- depthwise convolution
        C_DW_CFG_CMD: if (dma_cmd_ready) begin ld_idx <= '0; state <= C_DW_CFG; end
        C_DW_CFG: begin
          if (dma_rd_valid) begin
            if (ld_idx == 20'd0) dcfg[15:0] <= dma_rd_data;
            else                 dcfg[31:16] <= dma_rd_data;
            ld_idx <= ld_idx + 20'd1;
          end
          if (dma_done) begin
            dH <= dcfg[5:0];   dW <= dcfg[11:6];  dC <= dcfg[17:12];
            dK <= dcfg[26:24]; dS <= s_eff;       dP <= dcfg[31:29];
            HO <= 8'((7'(dcfg[5:0])  + 7'(2 * dcfg[31:29]) - 7'(dcfg[26:24])) / 8'(s_eff) + 8'd1);
            WO <= 8'((7'(dcfg[11:6]) + 7'(2 * dcfg[31:29]) - 7'(dcfg[26:24])) / 8'(s_eff) + 8'd1);
            state <= C_DW_CHK;
          end
        end
        C_DW_CHK: begin
          err_q <= dw_bad;
          state <= dw_bad ? C_DONE : C_DW_KER_CMD;
        end
        C_DW_KER_CMD: if (dma_cmd_ready) begin ld_idx <= '0; state <= C_DW_KER; end
        C_DW_KER: begin
          if (dma_rd_valid) ld_idx <= ld_idx + 20'd1;
          if (dma_done) state <= C_DW_IN_CMD;
        end
        C_DW_IN_CMD: if (dma_cmd_ready) begin ld_idx <= '0; state <= C_DW_IN; end
        C_DW_IN: begin
          if (dma_rd_valid) ld_idx <= ld_idx + 20'd1;
          if (dma_done) state <= C_DW_OUT_CMD;
        end
        C_DW_OUT_CMD: if (dma_cmd_ready) begin
          {oh, ow, ch, kh, kw} <= '0;
          acc   <= '0;
          fin   <= 1'b0;
          state <= C_DW_MAC;
        end
        C_DW_MAC: begin
          if (!fin) begin
            acc <= acc + 48'(prod);
            if (kw == dK - 3'd1) begin
              kw <= '0;
              if (kh == dK - 3'd1) begin kh <= '0; fin <= 1'b1; end
              else kh <= kh + 3'd1;
            end else kw <= kw + 3'd1;
          end else if (dma_wr_ready) begin
            acc <= '0;
            fin <= 1'b0;
            if (ch == dC - 6'd1) begin
              ch <= '0;
              if (ow == WO - 8'd1) begin
                ow <= '0;
                if (oh == HO - 8'd1) state <= C_DW_WAIT;
                else oh <= oh + 8'd1;
              end else ow <= ow + 8'd1;
            end else ch <= ch + 6'd1;
          end
        end
        C_DW_WAIT: if (dma_done) state <= C_DONE;
        C_DONE: state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

  // depthwise buffers: one write port each, filled by the DMA
  always_ff @(posedge clk) begin
    if (state == C_DW_KER && dma_rd_valid) kbuf[ld_idx[KAW-1:0]] <= dma_rd_data;
    if (state == C_DW_IN  && dma_rd_valid) ibuf[ld_idx[IAW-1:0]] <= dma_rd_data;
  end

endmodule

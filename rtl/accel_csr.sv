// accel_csr: the accelerator register block, an AXI4-Lite slave mapped at
// 0xA0000000 (64 KB window; the paper gives the base address, the window and
// the 32-bit AXI4-Lite bus, the register set is this design's own). Software
// uses it to observe the overlay; the work itself is started by the FPGA.*
// instructions.
//
//   0x00  ID            read-only, 0x4E4E4131
//   0x04  STATUS        bit 0: overlay busy
//   0x08  VCONV_COUNT   FPGA.VCONV instructions completed
//   0x0C  GEMM_COUNT    FPGA.GEMM instructions completed
//   0x10  RELU_COUNT    FPGA.RELU instructions completed
//   0x14  CUSTOM_COUNT  FPGA.CUSTOM instructions completed
//   0x18  BUSY_CYCLES   cycles the overlay was busy
//   0x1C  MAC_CYCLES    cycles the systolic arrays spent streaming
//   0x20  ERRORS        commands rejected (size or function code)
//   0x24  SCRATCH       read/write, byte strobes honoured
// Other offsets read as zero; writes to read-only registers are ignored.
// Both reads and writes answer OKAY one cycle after the address (and, for
// writes, the data) have been accepted.
module accel_csr
  import soc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   axil_req,
  output axil_rsp_t   axil_rsp,
  input  logic        busy,
  input  logic [31:0] count [4],
  input  logic [31:0] busy_cycles,
  input  logic [31:0] mac_cycles,
  input  logic [31:0] errors
);
  localparam logic [31:0] ID = 32'h4E4E_4131;

  logic        b_pend, r_pend;
  logic [31:0] r_data, scratch;
  logic [31:0] aw_q;
  logic        aw_have, w_have;
  logic [31:0] w_q;
  logic [3:0]  s_q;

  function automatic logic [31:0] reg_read(input logic [15:0] off);
    unique case (off[15:2])
      14'h00: return ID;
      14'h01: return {31'd0, busy};
      14'h02: return count[0];
      14'h03: return count[1];
      14'h04: return count[2];
      14'h05: return count[3];
      14'h06: return busy_cycles;
      14'h07: return mac_cycles;
      14'h08: return errors;
      14'h09: return scratch;
      default: return 32'd0;
    endcase
  endfunction

  always_comb begin
    axil_rsp          = '0;
    axil_rsp.aw_ready = !aw_have && !b_pend;
    axil_rsp.w_ready  = !w_have && !b_pend;
    axil_rsp.b_valid  = b_pend;
    axil_rsp.b_resp   = 2'b00;
    axil_rsp.ar_ready = !r_pend;
    axil_rsp.r_valid  = r_pend;
    axil_rsp.r_data   = r_data;
    axil_rsp.r_resp   = 2'b00;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_pend  <= 1'b0;
      r_pend  <= 1'b0;
      r_data  <= '0;
      scratch <= '0;
      aw_q    <= '0;
      w_q     <= '0;
      s_q     <= '0;
      aw_have <= 1'b0;
      w_have  <= 1'b0;
    end else begin
      // read channel
      if (axil_req.ar_valid && !r_pend) begin
        r_data <= reg_read(axil_req.ar_addr[15:0]);
        r_pend <= 1'b1;
      end else if (r_pend && axil_req.r_ready) r_pend <= 1'b0;

      // write channel: collect address and data, then write and respond
      if (axil_req.aw_valid && axil_rsp.aw_ready) begin aw_q <= axil_req.aw_addr; aw_have <= 1'b1; end
      if (axil_req.w_valid && axil_rsp.w_ready) begin
        w_q <= axil_req.w_data; s_q <= axil_req.w_strb; w_have <= 1'b1;
      end
      if (aw_have && w_have) begin
        if (aw_q[15:2] == 14'h09)
          for (int b = 0; b < 4; b++) if (s_q[b]) scratch[8*b +: 8] <= w_q[8*b +: 8];
        aw_have <= 1'b0;
        w_have  <= 1'b0;
        b_pend  <= 1'b1;
      end
      if (b_pend && axil_req.b_ready) b_pend <= 1'b0;
    end
  end

endmodule

// axi_arbiter: the AXI4 interconnect that lets several masters (instruction
// cache, data cache, DMA) share the single AXI4 slave (the BRAM).
//
// The paper names an AXI interconnect; its structure is this design's own.
// Arbitration is per transaction and round robin: when idle, the next master
// in turn that presents a read or write address is granted, and its five
// channels are connected straight through until the transaction ends (last
// read beat accepted, or write response accepted). Reads win over writes
// within one master. One transaction is in flight at a time, so no AXI IDs
// are needed. The grant adds one idle cycle per transaction.
module axi_arbiter
  import soc_pkg::*;
#(
  parameter int unsigned NM = 3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t m_req [NM],
  output axi_rsp_t m_rsp [NM],
  output axi_req_t s_req,
  input  axi_rsp_t s_rsp
);
  localparam int unsigned IW = (NM > 1) ? $clog2(NM) : 1;

  typedef enum logic [1:0] {A_IDLE, A_READ, A_WRITE} astate_e;
  astate_e       state;
  logic [IW-1:0] grant, last_grant;

  // Round-robin pick among requesting masters, starting after last_grant.
  logic          pick_valid;
  logic [IW-1:0] pick;
  always_comb begin
    pick_valid = 1'b0;
    pick       = '0;
    for (int k = 1; k <= NM; k++) begin
      int unsigned idx;
      idx = (int'(last_grant) + k) % NM;
      if (!pick_valid && (m_req[idx].ar_valid || m_req[idx].aw_valid)) begin
        pick_valid = 1'b1;
        pick       = IW'(idx);
      end
    end
  end

  always_comb begin
    s_req = '0;
    for (int i = 0; i < NM; i++) m_rsp[i] = '0;
    if (state != A_IDLE) begin
      s_req = m_req[grant];
      if (state == A_READ) begin
        s_req.aw_valid = 1'b0;
        s_req.w_valid  = 1'b0;
      end else begin
        s_req.ar_valid = 1'b0;
      end
      m_rsp[grant] = s_rsp;
      if (state == A_READ) begin
        m_rsp[grant].aw_ready = 1'b0;
        m_rsp[grant].w_ready  = 1'b0;
        m_rsp[grant].b_valid  = 1'b0;
      end else begin
        m_rsp[grant].ar_ready = 1'b0;
        m_rsp[grant].r_valid  = 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= A_IDLE;
      grant      <= '0;
      last_grant <= IW'(NM - 1);
    end else begin
      unique case (state)
        A_IDLE: if (pick_valid) begin
          grant      <= pick;
          last_grant <= pick;
          state      <= m_req[pick].ar_valid ? A_READ : A_WRITE;
        end
        A_READ:  if (s_rsp.r_valid && s_req.r_ready && s_rsp.r.last) state <= A_IDLE;
        A_WRITE: if (s_rsp.b_valid && s_req.b_ready) state <= A_IDLE;
        default: state <= A_IDLE;
      endcase
    end
  end

endmodule

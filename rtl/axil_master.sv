// axil_master: turns the core's uncached data accesses to the accelerator
// window (0xA0000000, 64 KB) into transactions on the 32-bit AXI4-Lite
// control bus. The paper specifies the bus (AXI4-Lite, 32-bit data) and the
// window; the bridge itself is this design's own.
//
// Core side: req, we, be, addr, wdata in; rdata, ready out, held until ready
// (the same protocol as the data cache). A write drives AW and W together and
// completes when the B response arrives; a read drives AR and completes when
// the R beat arrives, returning its data. One transaction at a time.
module axil_master
  import soc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        we,
  input  logic [3:0]  be,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output logic        ready,
  output axil_req_t   axil_req,
  input  axil_rsp_t   axil_rsp
);
  typedef enum logic [1:0] {L_IDLE, L_ADDR, L_RESP} lstate_e;
  lstate_e state;
  logic    aw_done, w_done, ar_done;

  always_comb begin
    axil_req          = '0;
    axil_req.aw_addr  = addr;
    axil_req.aw_valid = (state == L_ADDR) && we && !aw_done;
    axil_req.w_data   = wdata;
    axil_req.w_strb   = be;
    axil_req.w_valid  = (state == L_ADDR) && we && !w_done;
    axil_req.b_ready  = (state == L_RESP) && we;
    axil_req.ar_addr  = addr;
    axil_req.ar_valid = (state == L_ADDR) && !we && !ar_done;
    axil_req.r_ready  = (state == L_RESP) && !we;
  end

  assign rdata = axil_rsp.r_data;
  assign ready = (state == L_RESP) && (we ? axil_rsp.b_valid : axil_rsp.r_valid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= L_IDLE;
      aw_done <= 1'b0;
      w_done  <= 1'b0;
      ar_done <= 1'b0;
    end else begin
      unique case (state)
        L_IDLE: if (req) begin
          state   <= L_ADDR;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          ar_done <= 1'b0;
        end
        L_ADDR: begin
          if (we) begin
            if (axil_rsp.aw_ready) aw_done <= 1'b1;
            if (axil_rsp.w_ready)  w_done  <= 1'b1;
            if ((aw_done || axil_rsp.aw_ready) && (w_done || axil_rsp.w_ready)) state <= L_RESP;
          end else if (axil_rsp.ar_ready) begin
            ar_done <= 1'b1;
            state   <= L_RESP;
          end
        end
        L_RESP: if (ready) state <= L_IDLE;
        default: state <= L_IDLE;
      endcase
    end
  end

endmodule

// dcache: 4 KB direct-mapped data cache with 32-byte lines (size, mapping
// and line length from the paper; the write policy and timing are this
// design's own choice).
//
// 128 lines of 8 words; tag [31:12], index [11:5], word [4:2]. Arrays are
// read combinationally, so a load that hits completes in the cycle of the
// request. A load miss refills the line with one 8-beat AXI4 INCR read burst.
// Stores are write-through and no-write-allocate: every store is sent to
// memory as a single-beat AXI4 write with byte strobes, and also updates the
// cached line when it hits; the store completes when the write response
// arrives. Because memory is always up to date, the accelerators' DMA can read
// it directly; after an accelerator writes memory the overlay pulses `inval`,
// which drops every line in one cycle so later loads see the new data.
//
// Core side: req, we, be (byte enables), addr, wdata in; rdata, ready out.
// The core holds the request until ready.
module dcache
  import soc_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 4096,  // paper: 4 KB
  parameter int unsigned LINE_BYTES = 32     // paper: 32-byte lines
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inval,
  input  logic        req,
  input  logic        we,
  input  logic [3:0]  be,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output logic        ready,
  output axi_req_t    axi_req,
  input  axi_rsp_t    axi_rsp
);
  localparam int unsigned LINES = SIZE_BYTES / LINE_BYTES;
  localparam int unsigned WPL   = LINE_BYTES / 4;
  localparam int unsigned OW    = $clog2(LINE_BYTES);
  localparam int unsigned IXW   = $clog2(LINES);
  localparam int unsigned WW    = $clog2(WPL);
  localparam int unsigned TW    = 32 - OW - IXW;

  logic [31:0]      data_q [LINES*WPL];
  logic [TW-1:0]    tag_q  [LINES];
  logic [LINES-1:0] valid_q;

  logic [IXW-1:0] idx;
  logic [TW-1:0]  tag;
  logic [WW-1:0]  wsel;
  assign idx  = addr[OW +: IXW];
  assign tag  = addr[31 -: TW];
  assign wsel = addr[2 +: WW];

  typedef enum logic [2:0] {D_IDLE, D_AR, D_FILL, D_AW, D_B} dstate_e;
  dstate_e       state;
  logic [WW-1:0] beat;
  logic          aw_done, w_done;

  logic hit;
  assign hit   = valid_q[idx] && (tag_q[idx] == tag);
  assign rdata = data_q[{idx, wsel}];
  always_comb begin
    ready = 1'b0;
    if (req && !we) ready = (state == D_IDLE) && hit;
    if (req && we)  ready = (state == D_B) && axi_rsp.b_valid;
  end

  always_comb begin
    axi_req          = '0;
    axi_req.ar.addr  = {addr[31:OW], {OW{1'b0}}};
    axi_req.ar.len   = 8'(WPL - 1);
    axi_req.ar.size  = AXI_SIZE4;
    axi_req.ar.burst = AXI_INCR;
    axi_req.ar_valid = (state == D_AR);
    axi_req.r_ready  = (state == D_FILL);
    axi_req.aw.addr  = {addr[31:2], 2'b00};
    axi_req.aw.len   = 8'd0;
    axi_req.aw.size  = AXI_SIZE4;
    axi_req.aw.burst = AXI_INCR;
    axi_req.aw_valid = (state == D_AW) && !aw_done;
    axi_req.w.data   = wdata;
    axi_req.w.strb   = be;
    axi_req.w.last   = 1'b1;
    axi_req.w_valid  = (state == D_AW) && !w_done;
    axi_req.b_ready  = (state == D_B);
  end

  always_ff @(posedge clk) begin
    if (state == D_FILL && axi_rsp.r_valid) begin
      data_q[{idx, beat}] <= axi_rsp.r.data;
      if (axi_rsp.r.last) tag_q[idx] <= tag;
    end
    // write-through: update a hitting line when the store is issued
    if (state == D_IDLE && req && we && hit) begin
      for (int b = 0; b < 4; b++)
        if (be[b]) data_q[{idx, wsel}][8*b +: 8] <= wdata[8*b +: 8];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= D_IDLE;
      valid_q <= '0;
      beat    <= '0;
      aw_done <= 1'b0;
      w_done  <= 1'b0;
    end else begin
      unique case (state)
        D_IDLE: if (req) begin
          if (we) begin
            state   <= D_AW;
            aw_done <= 1'b0;
            w_done  <= 1'b0;
          end else if (!hit) begin
            state <= D_AR;
            beat  <= '0;
          end
        end
        D_AR: if (axi_rsp.ar_ready) state <= D_FILL;
        D_FILL: if (axi_rsp.r_valid) begin
          beat <= beat + WW'(1);
          if (axi_rsp.r.last) begin
            valid_q[idx] <= 1'b1;
            state        <= D_IDLE;
          end
        end
        D_AW: begin
          if (axi_rsp.aw_ready) aw_done <= 1'b1;
          if (axi_rsp.w_ready)  w_done  <= 1'b1;
          if ((aw_done || axi_rsp.aw_ready) && (w_done || axi_rsp.w_ready)) state <= D_B;
        end
        D_B: if (axi_rsp.b_valid) state <= D_IDLE;
        default: state <= D_IDLE;
      endcase
      if (inval) valid_q <= '0;
    end
  end

  // The core must hold a request stable while it waits.
  assert property (@(posedge clk) disable iff (!rst_n)
    (req && !ready && state != D_IDLE) |=> $stable(addr));

endmodule

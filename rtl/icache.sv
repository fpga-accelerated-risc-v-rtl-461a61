// icache: 4 KB direct-mapped instruction cache with 32-byte lines (size,
// mapping and line length from the paper; everything else is this design's
// own choice).
//
// 128 lines of 8 words. The address splits into tag [31:12], index [11:5]
// and word [4:2]. Tag and data arrays are read combinationally, so a hit
// returns the instruction in the cycle of the request (ready = 1). A miss
// fetches the whole line with one 8-beat AXI4 INCR read burst starting at the
// line base, writes the beats into the line as they arrive, and then the
// request hits. `inval` clears every valid bit in one cycle.
//
// Core side: req/addr in, rdata/ready out; the core holds req and addr until
// ready. Memory side: AXI4 master, read channels only.
module icache
  import soc_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 4096,  // paper: 4 KB
  parameter int unsigned LINE_BYTES = 32     // paper: 32-byte lines
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inval,
  input  logic        req,
  input  logic [31:0] addr,
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

  logic [31:0]    data_q [LINES*WPL];
  logic [TW-1:0]  tag_q  [LINES];
  logic [LINES-1:0] valid_q;

  logic [IXW-1:0] idx;
  logic [TW-1:0]  tag;
  logic [WW-1:0]  wsel;
  assign idx  = addr[OW +: IXW];
  assign tag  = addr[31 -: TW];
  assign wsel = addr[2 +: WW];

  typedef enum logic [1:0] {C_IDLE, C_AR, C_FILL} cstate_e;
  cstate_e       state;
  logic [WW-1:0] beat;
  logic [31:0]   maddr;   // address of the line being filled

  logic hit;
  assign hit   = valid_q[idx] && (tag_q[idx] == tag);
  assign ready = req && hit && (state == C_IDLE);
  assign rdata = data_q[{idx, wsel}];

  always_comb begin
    axi_req          = '0;
    axi_req.ar.addr  = {maddr[31:OW], {OW{1'b0}}};
    axi_req.ar.len   = 8'(WPL - 1);
    axi_req.ar.size  = AXI_SIZE4;
    axi_req.ar.burst = AXI_INCR;
    axi_req.ar_valid = (state == C_AR);
    axi_req.r_ready  = (state == C_FILL);
  end

  always_ff @(posedge clk) begin
    if (state == C_FILL && axi_rsp.r_valid) begin
      data_q[{maddr[OW +: IXW], beat}] <= axi_rsp.r.data;
      if (axi_rsp.r.last) tag_q[maddr[OW +: IXW]] <= maddr[31 -: TW];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= C_IDLE;
      valid_q <= '0;
      beat    <= '0;
      maddr   <= '0;
    end else begin
      unique case (state)
        C_IDLE: if (req && !hit) begin
          state <= C_AR;
          beat  <= '0;
          maddr <= addr;
        end
        C_AR: if (axi_rsp.ar_ready) state <= C_FILL;
        C_FILL: if (axi_rsp.r_valid) begin
          beat <= beat + WW'(1);
          if (axi_rsp.r.last) begin
            valid_q[maddr[OW +: IXW]] <= 1'b1;
            state        <= C_IDLE;
          end
        end
        default: state <= C_IDLE;
      endcase
      if (inval) valid_q <= '0;
    end
  end

endmodule

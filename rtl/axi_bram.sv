// axi_bram: the system's 64 KB on-chip main memory (BRAM) behind a 32-bit
// AXI4 slave port.
//
// The paper integrates a 64 KB BRAM with the AXI interconnect; the port logic
// here is this design's own. One transaction is served at a time: reads
// (INCR bursts up to 256 beats) return one beat per cycle with a registered
// memory read, as a block RAM would; writes take one W beat per cycle with
// byte strobes and answer with a single OKAY response. When read and write
// addresses arrive together the read is served first. Addresses wrap inside
// the memory (the upper address bits are ignored).
module axi_bram
  import soc_pkg::*;
#(
  parameter int unsigned BYTES = 65536   // 64 KB, from the paper
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t req,
  output axi_rsp_t rsp
);
  localparam int unsigned WORDS = BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [31:0] mem [WORDS];

  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE, S_RESP} state_e;
  state_e      state;
  logic [AW-1:0] waddr;
  logic [7:0]  beats;
  logic [31:0] rdata;

  always_comb begin
    rsp          = '0;
    rsp.ar_ready = (state == S_IDLE);
    rsp.aw_ready = (state == S_IDLE) && !req.ar_valid;
    rsp.w_ready  = (state == S_WRITE);
    rsp.b_valid  = (state == S_RESP);
    rsp.b_resp   = 2'b00;
    rsp.r_valid  = (state == S_READ);
    rsp.r.data   = rdata;
    rsp.r.resp   = 2'b00;
    rsp.r.last   = (state == S_READ) && (beats == 8'd0);
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && req.ar_valid) begin
      rdata <= mem[req.ar.addr[AW+1:2]];
    end else if (state == S_READ && req.r_ready && beats != 8'd0) begin
      rdata <= mem[waddr + AW'(1)];
    end
    if (state == S_WRITE && req.w_valid) begin
      for (int b = 0; b < 4; b++)
        if (req.w.strb[b]) mem[waddr][8*b +: 8] <= req.w.data[8*b +: 8];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      waddr <= '0;
      beats <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (req.ar_valid) begin
            state <= S_READ;
            waddr <= req.ar.addr[AW+1:2];
            beats <= req.ar.len;
          end else if (req.aw_valid) begin
            state <= S_WRITE;
            waddr <= req.aw.addr[AW+1:2];
            beats <= req.aw.len;
          end
        end
        S_READ: if (req.r_ready) begin
          if (beats == 8'd0) state <= S_IDLE;
          else begin
            beats <= beats - 8'd1;
            waddr <= waddr + AW'(1);
          end
        end
        S_WRITE: if (req.w_valid) begin
          waddr <= waddr + AW'(1);
          if (req.w.last || beats == 8'd0) state <= S_RESP;
          else beats <= beats - 8'd1;
        end
        S_RESP: if (req.b_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A write burst's WLAST must come with its final beat.
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_WRITE && req.w_valid && beats == 8'd0) |-> req.w.last);

endmodule

// dma_engine: the accelerator overlay's shared DMA. It moves tensors of
// 16-bit elements between the AXI4 memory and the accelerators' local
// buffers, so each accelerator only sees an element stream.
//
// The paper lists a shared DMA with buffers in its overlay resources and
// attributes part of the accelerated latency to DMA transfers; how it works is
// this design's own. A command gives a direction, a word-aligned byte address
// and an element count. Elements are packed two per 32-bit word, element 2i
// in bits 15:0 and element 2i+1 in bits 31:16.
//   read  (memory -> accelerator): AXI4 INCR read bursts of up to MAX_BURST
//         words; each word is unpacked and offered on rd_valid/rd_data,
//         one element per cycle, with rd_ready back-pressure.
//   write (accelerator -> memory): elements accepted on wr_valid/wr_ready are
//         packed into words and sent in AXI4 INCR write bursts of up to
//         MAX_BURST beats; an odd final element is written with strobe 0011.
// `done` pulses for one cycle when the whole command has finished (last
// element delivered, or last write response received). One command at a
// time; cmd_ready is high only when idle.
module dma_engine
  import soc_pkg::*;
#(
  parameter int unsigned MAX_BURST = 16   // words per AXI burst (assumed)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  dma_cmd_t    cmd,
  output logic        rd_valid,
  output logic [15:0] rd_data,
  input  logic        rd_ready,
  input  logic        wr_valid,
  input  logic [15:0] wr_data,
  output logic        wr_ready,
  output logic        done,
  output axi_req_t    axi_req,
  input  axi_rsp_t    axi_rsp
);
  typedef enum logic [2:0] {S_IDLE, S_RD_AR, S_RD_R, S_RD_END, S_WR_AW, S_WR_W, S_WR_B, S_DONE} st_e;
  st_e state;

  logic [31:0] addr;
  logic [19:0] words_left;   // words not yet requested (AR/AW issued)
  logic [19:0] elems_left;   // elements not yet delivered / accepted
  logic [8:0]  beats_left;   // write beats left in the current burst
  logic [8:0]  burst;

  // unpack / pack buffers
  logic [31:0] word_q;
  logic [3:0]  strb_q;
  logic        have_word, half;

  assign burst = (words_left >= 20'(MAX_BURST)) ? 9'(MAX_BURST) : words_left[8:0];
  assign cmd_ready = (state == S_IDLE);
  assign done      = (state == S_DONE);

  logic reading, writing;
  assign reading = (state == S_RD_AR) || (state == S_RD_R) || (state == S_RD_END);
  assign writing = (state == S_WR_AW) || (state == S_WR_W) || (state == S_WR_B);

  assign rd_valid = reading && have_word;
  assign rd_data  = half ? word_q[31:16] : word_q[15:0];
  assign wr_ready = writing && !have_word && (elems_left != 20'd0);

  always_comb begin
    axi_req          = '0;
    axi_req.ar.addr  = addr;
    axi_req.ar.len   = 8'(burst - 9'd1);
    axi_req.ar.size  = AXI_SIZE4;
    axi_req.ar.burst = AXI_INCR;
    axi_req.ar_valid = (state == S_RD_AR);
    axi_req.r_ready  = (state == S_RD_R) && !have_word;
    axi_req.aw.addr  = addr;
    axi_req.aw.len   = 8'(burst - 9'd1);
    axi_req.aw.size  = AXI_SIZE4;
    axi_req.aw.burst = AXI_INCR;
    axi_req.aw_valid = (state == S_WR_AW);
    axi_req.w.data   = word_q;
    axi_req.w.strb   = strb_q;
    axi_req.w.last   = (beats_left == 9'd1);
    axi_req.w_valid  = (state == S_WR_W) && have_word;
    axi_req.b_ready  = (state == S_WR_B);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      addr       <= '0;
      words_left <= '0;
      elems_left <= '0;
      beats_left <= '0;
      word_q     <= '0;
      strb_q     <= '0;
      have_word  <= 1'b0;
      half       <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          addr       <= {cmd.addr[31:2], 2'b00};
          elems_left <= cmd.n_elem;
          words_left <= (cmd.n_elem + 20'd1) >> 1;
          have_word  <= 1'b0;
          half       <= 1'b0;
          if (cmd.n_elem == 20'd0) state <= S_DONE;
          else state <= cmd.write ? S_WR_AW : S_RD_AR;
        end
        S_RD_AR: if (axi_rsp.ar_ready) begin
          addr       <= addr + {21'd0, burst, 2'b00};
          words_left <= words_left - 20'(burst);
          state      <= S_RD_R;
        end
        S_RD_R: if (axi_rsp.r_valid && !have_word && axi_rsp.r.last)
          state <= (words_left == 20'd0) ? S_RD_END : S_RD_AR;
        S_RD_END: if (elems_left == 20'd0) state <= S_DONE;
        S_WR_AW: if (axi_rsp.aw_ready) begin
          addr       <= addr + {21'd0, burst, 2'b00};
          words_left <= words_left - 20'(burst);
          beats_left <= burst;
          state      <= S_WR_W;
        end
        S_WR_W: if (have_word && axi_rsp.w_ready && beats_left == 9'd1) state <= S_WR_B;
        S_WR_B: if (axi_rsp.b_valid) state <= (words_left == 20'd0) ? S_DONE : S_WR_AW;
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase

      // read side: accept a word, then hand out its one or two elements
      if (state == S_RD_R && axi_rsp.r_valid && !have_word) begin
        word_q    <= axi_rsp.r.data;
        have_word <= 1'b1;
        half      <= 1'b0;
      end
      if (rd_valid && rd_ready) begin
        elems_left <= elems_left - 20'd1;
        if (half || elems_left == 20'd1) have_word <= 1'b0;
        else half <= 1'b1;
      end

      // write side: gather two elements (or a final odd one) into a word
      if (wr_valid && wr_ready) begin
        elems_left <= elems_left - 20'd1;
        if (!half) begin
          word_q[15:0] <= wr_data;
          word_q[31:16] <= 16'd0;
          strb_q       <= 4'b0011;
          if (elems_left == 20'd1) have_word <= 1'b1;
          else half <= 1'b1;
        end else begin
          word_q[31:16] <= wr_data;
          strb_q        <= 4'b1111;
          have_word     <= 1'b1;
          half          <= 1'b0;
        end
      end
      if (state == S_WR_W && have_word && axi_rsp.w_ready) begin
        have_word  <= 1'b0;
        beats_left <= beats_left - 9'd1;
      end
    end
  end

  // Elements are never offered outside a read command.
  assert property (@(posedge clk) disable iff (!rst_n) rd_valid |-> reading);

endmodule

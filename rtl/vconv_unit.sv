// vconv_unit: the FPGA.VCONV accelerator, "fpga.vconv rd, rs1, rs2, rs3".
//
// Computes the paper's convolution loop nest
//   out[h][w][co] = sum_{kh,kw,ci} in[h*S+kh-P][w*S+kw-P][ci] * ker[kh][kw][ci][co]
// with input (Q8.8, HWC layout) at rs1, kernel (Q12.4, [kh][kw][ci][co]) at
// rs2 and output (Q8.8, HWC) at rd; input positions outside the image read
// as zero (padding P). rs3 packs the configuration (this design's own
// layout; the paper only says dimensions, stride and padding are packed into
// one word):
//   [5:0] H   [11:6] W   [17:12] C_in   [23:18] C_out
//   [26:24] K (kernel size)   [28:27] S (stride, 0 is taken as 1)   [31:29] P
// Output size: H_out = (H + 2P - K)/S + 1, likewise W_out.
//
// The 4 x 4 output-stationary systolic array (systolic_os, 16 PEs as in the
// paper) computes a tile of 4 output pixels (array rows, consecutive in
// raster order) by 4 output channels (array columns) at a time. Each of the
// R = K*K*C_in reduction steps reads four input values and four kernel values
// from the local buffers; skew registers delay row i and column j by i and j
// cycles. A tile takes 1 + R + 7 cycles; its 16 results are rounded to Q8.8
// (shift right by 4, saturate) and written to the output buffer in 4 cycles.
//
// Schedule: the kernel is read whole through the shared DMA into its local
// buffer; then the input transfer is started and the tiles are computed while
// it runs. Before streaming, a tile waits (state V_WAIT) until the input rows
// it reads have arrived: rows up to oh_last*S + K - P, where oh_last is the
// output row of its last pixel. All results collect in the output buffer,
// which is written back through the DMA once the last tile is done and the
// input transfer has finished. The paper overlaps DMA with computation by
// triple buffering; here only the input transfer overlaps with computation:
// the one shared DMA runs one command at a time, so kernel loading and the
// write-back stay serial. Configurations that do not fit the buffers raise
// `error` with `done` and compute nothing.
module vconv_unit
  import soc_pkg::*;
#(
  parameter int unsigned ROWS       = 4,      // paper: 4 x 4 array
  parameter int unsigned COLS       = 4,
  parameter int unsigned IBUF_DEPTH = 8192,   // elements (assumed)
  parameter int unsigned WBUF_DEPTH = 4096,
  parameter int unsigned OBUF_DEPTH = 8192,
  parameter int unsigned ACC_W      = 48
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] dst_addr,
  input  logic [31:0] in_addr,
  input  logic [31:0] w_addr,
  input  logic [31:0] cfg,
  output logic        busy,
  output logic        done,
  output logic        error,
  output logic [31:0] mac_cycles,   // cycles the array spent streaming
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
  localparam int unsigned IAW = $clog2(IBUF_DEPTH);
  localparam int unsigned WAW = $clog2(WBUF_DEPTH);
  localparam int unsigned OAW = $clog2(OBUF_DEPTH);

  logic signed [15:0] ibuf [IBUF_DEPTH];
  logic signed [15:0] wbuf [WBUF_DEPTH];
  logic signed [15:0] obuf [OBUF_DEPTH];

  typedef enum logic [3:0] {V_IDLE, V_CHECK, V_LDW_CMD, V_LDW, V_LDI_CMD, V_TILE, V_WAIT, V_STREAM,
                            V_DRAIN, V_ST_CMD, V_STORE, V_DONE} vstate_e;
  vstate_e state;

  // configuration
  logic [31:0] dst_q, in_q, w_q;
  logic [5:0]  H, W, CI, CO;
  logic [2:0]  K, P;
  logic [1:0]  S;
  logic [7:0]  HO, WO;
  logic [19:0] n_in, n_w, n_out, R, NPIX;
  logic        err_q;

  // tile / step state
  logic [19:0] pix0;             // first pixel of the tile
  logic [5:0]  co0;              // first output channel of the tile
  logic [19:0] t;                // stream cycle
  logic [2:0]  kh, kw;
  logic [5:0]  ci;
  logic [19:0] wstep;            // t * C_out
  logic [19:0] cnt;              // load / store element counter
  logic [1:0]  drow;             // drain row
  logic [7:0]  oh [ROWS];
  logic [7:0]  ow [ROWS];

  // input streaming, overlapped with the tiles
  logic        in_loading, in_done;
  logic [19:0] in_cnt;           // input elements received so far
  logic [7:0]  oh_last;          // output row of the tile's last pixel
  logic [19:0] need;             // input elements the tile reads
  always_comb begin
    logic signed [11:0] rows;
    rows = $signed({4'd0, oh_last}) * $signed({10'd0, S}) + $signed({9'd0, K}) - $signed({9'd0, P});
    if (rows > $signed({6'd0, H})) rows = $signed({6'd0, H});
    if (rows < 0) rows = '0;
    need = 20'(rows[6:0]) * 20'(W) * 20'(CI);
  end

  // ------------------------------------------------------------ array and skew
  logic signed [15:0]      raw_a [ROWS];
  logic signed [15:0]      raw_b [COLS];
  logic signed [15:0]      a_in  [ROWS];
  logic signed [15:0]      b_in  [COLS];
  logic signed [ACC_W-1:0] acc   [ROWS][COLS];
  logic signed [15:0]      a_dly [ROWS][ROWS];
  logic signed [15:0]      b_dly [COLS][COLS];
  logic                    clr;

  assign clr = (state == V_TILE);

  systolic_os #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n, .clear(clr), .a_in, .b_in, .acc
  );

  logic stepping;
  assign stepping = (state == V_STREAM) && (t < R);

  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      logic signed [11:0] ih, iw;
      logic [19:0] ia;
      ih = $signed({4'd0, oh[i]}) * $signed({10'd0, S}) + $signed({9'd0, kh}) - $signed({9'd0, P});
      iw = $signed({4'd0, ow[i]}) * $signed({10'd0, S}) + $signed({9'd0, kw}) - $signed({9'd0, P});
      ia = (20'(ih[7:0]) * 20'(W) + 20'(iw[7:0])) * 20'(CI) + 20'(ci);
      raw_a[i] = '0;
      if (stepping && (pix0 + 20'(i) < NPIX) && ih >= 0 && ih < $signed({6'd0, H}) &&
          iw >= 0 && iw < $signed({6'd0, W}))
        raw_a[i] = ibuf[IAW'(ia)];
    end
    for (int j = 0; j < COLS; j++) begin
      raw_b[j] = '0;
      if (stepping && (7'(co0) + 7'(j) < 7'(CO)))
        raw_b[j] = wbuf[WAW'(wstep + 20'(co0) + 20'(j))];
    end
    for (int i = 0; i < ROWS; i++) a_in[i] = (i == 0) ? raw_a[0] : a_dly[i][i-1];
    for (int j = 0; j < COLS; j++) b_in[j] = (j == 0) ? raw_b[0] : b_dly[j][j-1];
  end

  // skew shift registers: row i (column j) delayed by i (j) cycles
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++) for (int d = 0; d < ROWS; d++) a_dly[i][d] <= '0;
      for (int j = 0; j < COLS; j++) for (int d = 0; d < COLS; d++) b_dly[j][d] <= '0;
    end else begin
      for (int i = 0; i < ROWS; i++) begin
        a_dly[i][0] <= raw_a[i];
        for (int d = 1; d < ROWS; d++) a_dly[i][d] <= a_dly[i][d-1];
      end
      for (int j = 0; j < COLS; j++) begin
        b_dly[j][0] <= raw_b[j];
        for (int d = 1; d < COLS; d++) b_dly[j][d] <= b_dly[j][d-1];
      end
    end
  end

  // ------------------------------------------------------------ DMA side
  always_comb begin
    dma_cmd_valid = (state == V_LDI_CMD) || (state == V_LDW_CMD) || (state == V_ST_CMD && in_done);
    dma_cmd.write = (state == V_ST_CMD);
    unique case (state)
      V_LDI_CMD: begin dma_cmd.addr = in_q;  dma_cmd.n_elem = n_in; end
      V_LDW_CMD: begin dma_cmd.addr = w_q;   dma_cmd.n_elem = n_w; end
      default:   begin dma_cmd.addr = dst_q; dma_cmd.n_elem = n_out; end
    endcase
    dma_rd_ready = in_loading || (state == V_LDW);
    dma_wr_valid = (state == V_STORE) && (cnt < n_out);
    dma_wr_data  = obuf[OAW'(cnt)];
  end

  assign busy  = (state != V_IDLE);
  assign done  = (state == V_DONE);
  assign error = (state == V_DONE) && err_q;

  // ------------------------------------------------------------ control
  logic [2:0] s_eff;
  assign s_eff = (cfg[28:27] == 2'd0) ? 3'd1 : {1'b0, cfg[28:27]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= V_IDLE;
      {dst_q, in_q, w_q} <= '0;
      {H, W, CI, CO, K, P, S, HO, WO} <= '0;
      {n_in, n_w, n_out, R, NPIX} <= '0;
      err_q <= 1'b0;
      {pix0, co0, t, kh, kw, ci, wstep, cnt, drow} <= '0;
      for (int i = 0; i < ROWS; i++) begin oh[i] <= '0; ow[i] <= '0; end
      mac_cycles <= '0;
      {in_loading, in_done, in_cnt, oh_last} <= '0;
    end else begin
      if (in_loading && dma_rd_valid) begin
        ibuf[IAW'(in_cnt)] <= dma_rd_data;
        in_cnt <= in_cnt + 20'd1;
      end
      if (in_loading && dma_done) begin
        in_loading <= 1'b0;
        in_done    <= 1'b1;
      end
      unique case (state)
        V_IDLE: if (start) begin
          dst_q <= dst_addr;
          in_q  <= in_addr;
          w_q   <= w_addr;
          H  <= cfg[5:0];   W  <= cfg[11:6];
          CI <= cfg[17:12]; CO <= cfg[23:18];
          K  <= cfg[26:24]; S  <= s_eff[1:0]; P <= cfg[31:29];
          HO <= 8'((7'(cfg[5:0])  + 7'(2 * cfg[31:29]) - 7'(cfg[26:24])) / 8'(s_eff) + 8'd1);
          WO <= 8'((7'(cfg[11:6]) + 7'(2 * cfg[31:29]) - 7'(cfg[26:24])) / 8'(s_eff) + 8'd1);
          state <= V_CHECK;
        end
        V_CHECK: begin
          n_in  <= 20'(H) * 20'(W) * 20'(CI);
          n_w   <= 20'(K) * 20'(K) * 20'(CI) * 20'(CO);
          n_out <= 20'(HO) * 20'(WO) * 20'(CO);
          R     <= 20'(K) * 20'(K) * 20'(CI);
          NPIX  <= 20'(HO) * 20'(WO);
          err_q <= (20'(H) * 20'(W) * 20'(CI) > 20'(IBUF_DEPTH)) ||
                   (20'(K) * 20'(K) * 20'(CI) * 20'(CO) > 20'(WBUF_DEPTH)) ||
                   (20'(HO) * 20'(WO) * 20'(CO) > 20'(OBUF_DEPTH)) ||
                   (7'(H) + 7'(2 * P) < 7'(K)) || (7'(W) + 7'(2 * P) < 7'(K)) ||
                   K == 3'd0 || CI == 6'd0 || CO == 6'd0;
          in_done <= 1'b0;
          state <= V_LDW_CMD;
        end
        V_LDW_CMD: begin
          cnt <= '0;
          if (err_q) state <= V_DONE;
          else if (dma_cmd_ready) state <= V_LDW;
        end
        V_LDW: begin
          if (dma_rd_valid) begin
            wbuf[WAW'(cnt)] <= dma_rd_data;
            cnt <= cnt + 20'd1;
          end
          if (dma_done) state <= V_LDI_CMD;
        end
        V_LDI_CMD: if (dma_cmd_ready) begin
          // the input streams in while the tiles are computed
          in_loading <= 1'b1;
          in_cnt     <= '0;
          pix0       <= '0;
          co0        <= '0;
          state      <= V_TILE;
        end
        V_TILE: begin
          // clear the array, place the tile's four pixels
          for (int i = 0; i < ROWS; i++) begin
            oh[i] <= 8'((pix0 + 20'(i)) / 20'(WO));
            ow[i] <= 8'((pix0 + 20'(i)) % 20'(WO));
          end
          oh_last <= 8'(((pix0 + 20'(ROWS - 1) < NPIX) ? pix0 + 20'(ROWS - 1) : NPIX - 20'd1) / 20'(WO));
          {t, kh, kw, ci, wstep} <= '0;
          state <= V_WAIT;
        end
        V_WAIT: if (in_done || in_cnt >= need) state <= V_STREAM;
        V_STREAM: begin
          mac_cycles <= mac_cycles + 32'd1;
          if (t < R) begin
            wstep <= wstep + 20'(CO);
            if (ci == CI - 6'd1) begin
              ci <= '0;
              if (kw == K - 3'd1) begin kw <= '0; kh <= kh + 3'd1; end
              else kw <= kw + 3'd1;
            end else ci <= ci + 6'd1;
          end
          if (t == R + 20'(ROWS + COLS - 2)) begin
            drow  <= '0;
            state <= V_DRAIN;
          end
          t <= t + 20'd1;
        end
        V_DRAIN: begin
          // one array row (one output pixel) per cycle into the output buffer
          for (int j = 0; j < COLS; j++)
            if (pix0 + 20'(drow) < NPIX && 7'(co0) + 7'(j) < 7'(CO))
              obuf[OAW'((pix0 + 20'(drow)) * 20'(CO) + 20'(co0) + 20'(j))] <=
                sat_q88(48'(acc[drow][j]));
          drow <= drow + 2'd1;
          if (drow == 2'(ROWS - 1)) begin
            if (7'(co0) + 7'(COLS) < 7'(CO)) begin
              co0   <= co0 + 6'(COLS);
              state <= V_TILE;
            end else if (pix0 + 20'(ROWS) < NPIX) begin
              co0   <= '0;
              pix0  <= pix0 + 20'(ROWS);
              state <= V_TILE;
            end else begin
              cnt   <= '0;
              state <= V_ST_CMD;
            end
          end
        end
        V_ST_CMD: if (dma_cmd_ready) state <= V_STORE;
        V_STORE: begin
          if (dma_wr_valid && dma_wr_ready) cnt <= cnt + 20'd1;
          if (dma_done) state <= V_DONE;
        end
        V_DONE: state <= V_IDLE;
        default: state <= V_IDLE;
      endcase
    end
  end

endmodule

// gemm_unit: the FPGA.GEMM accelerator, "fpga.gemm rd, rs1, rs2, rs3".
//
// Computes C[M][N] = A[M][K] x B[K][N]: A holds Q8.8 activations (address
// rs1), B holds Q12.4 weights (address rs2), and C is written as Q8.8 to the
// address in rd, all row-major 16-bit elements packed two per word. rs3
// packs the sizes: M in bits 9:0, N in 19:10, K in 29:20. The paper gives an
// 8 x 8 weight-stationary systolic array (64 MACs per cycle), INT16
// arithmetic and tiling; the operand packing, buffer sizes and schedule are
// this design's own.
//
// Schedule: A and B are read through the shared DMA into banked local
// buffers (A split into 8 banks by k mod 8, B and the accumulator buffer C
// by n mod 8, so that each array row or column has a bank of its own). Then
// for every 8-column tile nt of B and every 8-row tile kt of K:
//   * 8 cycles load the 8 x 8 weight tile B[kt*8+i][nt*8+j] into the array,
//   * M + 15 cycles stream the rows of A through it (row i of the array gets
//     A[m][kt*8+i] in cycle m+i) while the columns' outputs are added into
//     the 48-bit accumulators C[m][nt*8+j] (overwritten on the first kt).
// Finally C is rounded to Q8.8 (arithmetic shift right by 4, saturated) and
// written out through the DMA. Sizes that do not fit the buffers
// (M*K > A_DEPTH, K*N > B_DEPTH or M*N > C_DEPTH) skip the computation and
// raise `error` with `done`. Edges of partial tiles are padded with zeros.
module gemm_unit
  import soc_pkg::*;
#(
  parameter int unsigned DIM     = 8,      // paper: 8 x 8 array
  parameter int unsigned A_DEPTH = 4096,   // elements (assumed)
  parameter int unsigned B_DEPTH = 4096,
  parameter int unsigned C_DEPTH = 4096,
  parameter int unsigned ACC_W   = 48
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] dst_addr,
  input  logic [31:0] a_addr,
  input  logic [31:0] b_addr,
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
  localparam int unsigned DW  = $clog2(DIM);
  localparam int unsigned ABW = $clog2(A_DEPTH / DIM);
  localparam int unsigned BBW = $clog2(B_DEPTH / DIM);
  localparam int unsigned CBW = $clog2(C_DEPTH / DIM);


  typedef enum logic [3:0] {G_IDLE, G_LDA_CMD, G_LDA, G_LDB_CMD, G_LDB, G_WLOAD, G_STREAM,
                            G_ST_CMD, G_STORE, G_DONE} gstate_e;
  gstate_e state;

  logic [31:0] dst_q, a_q, b_q;
  logic [9:0]  M, N, K;
  logic [7:0]  KT, NT;           // tiles of K and N
  logic [7:0]  kt, nt;
  logic [10:0] t;                // stream cycle / weight row
  logic [9:0]  li, lj;           // load / store element counters (row, col)
  logic [19:0] lbase;            // row base address in the banked buffer
  logic        err_q;

  // ------------------------------------------------------------ array
  logic                    w_load;
  logic [DW-1:0]           w_row;
  logic signed [15:0]      w_data [DIM];
  logic signed [15:0]      a_in   [DIM];
  logic signed [ACC_W-1:0] psum   [DIM];

  systolic_ws #(.ROWS(DIM), .COLS(DIM), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n, .w_load, .w_row, .w_data, .a_in, .psum_out(psum)
  );

  // ------------------------------------------------------------ banked buffers
  // Bank b of A holds A[m][k] with k mod 8 == b, bank b of B holds B[k][n]
  // and bank b of C holds C[m][n] with n mod 8 == b, so every array row
  // (column) reads (writes) a bank of its own in each cycle. Each bank is a
  // separate memory with one write port.
  logic              ld_a_we, ld_b_we;
  logic [DW-1:0]     ld_bank;
  logic [19:0]       ld_addr;
  logic [ABW-1:0]    a_raddr [DIM];
  logic [BBW-1:0]    b_raddr;
  logic [CBW-1:0]    c_addr  [DIM];
  logic              c_we    [DIM];
  logic signed [ACC_W-1:0] c_wdata [DIM];
  logic signed [15:0]      a_rd    [DIM];
  logic signed [15:0]      b_rd    [DIM];
  logic signed [ACC_W-1:0] c_rd    [DIM];
  logic signed [ACC_W-1:0] c_st    [DIM];
  logic [CBW-1:0]    st_addr;

  assign ld_bank = lj[DW-1:0];
  assign ld_addr = lbase + 20'(lj >> DW);
  assign ld_a_we = (state == G_LDA) && dma_rd_valid;
  assign ld_b_we = (state == G_LDB) && dma_rd_valid;
  assign st_addr = CBW'(ld_addr);

  for (genvar b = 0; b < DIM; b++) begin : g_bank
    logic signed [15:0]      a_mem [A_DEPTH/DIM];
    logic signed [15:0]      b_mem [B_DEPTH/DIM];
    logic signed [ACC_W-1:0] c_mem [C_DEPTH/DIM];
    always_ff @(posedge clk) begin
      if (ld_a_we && ld_bank == DW'(b)) a_mem[ABW'(ld_addr)] <= dma_rd_data;
      if (ld_b_we && ld_bank == DW'(b)) b_mem[BBW'(ld_addr)] <= dma_rd_data;
      if (c_we[b]) c_mem[c_addr[b]] <= c_wdata[b];
    end
    assign a_rd[b] = a_mem[a_raddr[b]];
    assign b_rd[b] = b_mem[b_raddr];
    assign c_rd[b] = c_mem[c_addr[b]];
    assign c_st[b] = c_mem[st_addr];
  end

  // ------------------------------------------------------------ array
  // buffer read addresses
  logic [19:0] kw_row;
  always_comb begin
    kw_row  = 20'(kt) * 20'(DIM) + 20'(t[DW-1:0]);
    b_raddr = BBW'(kw_row * 20'(NT) + 20'(nt));
    for (int i = 0; i < DIM; i++)
      a_raddr[i] = ABW'(20'(13'($signed({2'b00, t}) - 13'(i))) * 20'(KT) + 20'(kt));
    for (int j = 0; j < DIM; j++)
      c_addr[j] = CBW'(20'(13'($signed({2'b00, t}) - 13'(DIM) - 13'(j))) * 20'(NT) + 20'(nt));
  end

  // array inputs and accumulator updates
  always_comb begin
    w_load = (state == G_WLOAD);
    w_row  = t[DW-1:0];
    for (int j = 0; j < DIM; j++) begin
      w_data[j] = '0;
      if (kw_row < 20'(K) && 20'(nt) * 20'(DIM) + 20'(j) < 20'(N)) w_data[j] = b_rd[j];
    end
    for (int i = 0; i < DIM; i++) begin
      logic [19:0] kk;
      logic signed [12:0] m;
      kk = 20'(kt) * 20'(DIM) + 20'(i);
      m  = $signed({2'b00, t}) - 13'(i);
      a_in[i] = '0;
      if (state == G_STREAM && m >= 0 && m < $signed({3'b000, M}) && kk < 20'(K))
        a_in[i] = a_rd[i];
    end
    // column j delivers row m = t - DIM - j
    for (int j = 0; j < DIM; j++) begin
      logic signed [12:0] m;
      m = $signed({2'b00, t}) - 13'(DIM) - 13'(j);
      c_we[j]    = (state == G_STREAM) && m >= 0 && m < $signed({3'b000, M}) &&
                   20'(nt) * 20'(DIM) + 20'(j) < 20'(N);
      c_wdata[j] = (kt == 8'd0) ? psum[j] : c_rd[j] + psum[j];
    end
  end

  // ------------------------------------------------------------ DMA side
  logic [19:0] n_a, n_b, n_c;
  assign n_a = 20'(M) * 20'(K);
  assign n_b = 20'(K) * 20'(N);
  assign n_c = 20'(M) * 20'(N);

  logic signed [ACC_W-1:0] c_out;
  assign c_out = c_st[lj[DW-1:0]];

  always_comb begin
    dma_cmd_valid = (state == G_LDA_CMD) || (state == G_LDB_CMD) || (state == G_ST_CMD);
    dma_cmd.write = (state == G_ST_CMD);
    unique case (state)
      G_LDA_CMD: begin dma_cmd.addr = a_q;   dma_cmd.n_elem = n_a; end
      G_LDB_CMD: begin dma_cmd.addr = b_q;   dma_cmd.n_elem = n_b; end
      default:   begin dma_cmd.addr = dst_q; dma_cmd.n_elem = n_c; end
    endcase
    dma_rd_ready = (state == G_LDA) || (state == G_LDB);
    dma_wr_valid = (state == G_STORE) && (li < M);
    dma_wr_data  = sat_q88(48'(c_out));
  end

  assign busy  = (state != G_IDLE);
  assign done  = (state == G_DONE);
  assign error = (state == G_DONE) && err_q;

  // ------------------------------------------------------------ control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= G_IDLE;
      {dst_q, a_q, b_q} <= '0;
      {M, N, K, KT, NT, kt, nt, t, li, lj, lbase} <= '0;
      err_q <= 1'b0;
      mac_cycles <= '0;
    end else begin
      unique case (state)
        G_IDLE: if (start) begin
          dst_q <= dst_addr;
          a_q   <= a_addr;
          b_q   <= b_addr;
          M     <= cfg[9:0];
          N     <= cfg[19:10];
          K     <= cfg[29:20];
          KT    <= 8'((cfg[29:20] + 10'(DIM - 1)) >> DW);
          NT    <= 8'((cfg[19:10] + 10'(DIM - 1)) >> DW);
          err_q <= (20'(cfg[9:0]) * 20'(cfg[29:20])  > 20'(A_DEPTH)) ||
                   (20'(cfg[29:20]) * 20'(cfg[19:10]) > 20'(B_DEPTH)) ||
                   (20'(cfg[9:0]) * 20'(cfg[19:10])  > 20'(C_DEPTH));
          state <= G_LDA_CMD;
        end
        G_LDA_CMD: begin
          {li, lj, lbase} <= '0;
          if (err_q) state <= G_DONE;
          else if (dma_cmd_ready) state <= G_LDA;
        end
        G_LDA: begin
          if (dma_rd_valid) begin
            if (lj == K - 10'd1) begin
              lj <= '0; li <= li + 10'd1; lbase <= lbase + 20'(KT);
            end else lj <= lj + 10'd1;
          end
          if (dma_done) begin
            {li, lj, lbase} <= '0;
            state <= G_LDB_CMD;
          end
        end
        G_LDB_CMD: if (dma_cmd_ready) state <= G_LDB;
        G_LDB: begin
          if (dma_rd_valid) begin
            if (lj == N - 10'd1) begin
              lj <= '0; li <= li + 10'd1; lbase <= lbase + 20'(NT);
            end else lj <= lj + 10'd1;
          end
          if (dma_done) begin
            {kt, nt, t} <= '0;
            state <= G_WLOAD;
          end
        end
        G_WLOAD: begin
          if (t == 11'(DIM - 1)) begin t <= '0; state <= G_STREAM; end
          else t <= t + 11'd1;
        end
        G_STREAM: begin
          mac_cycles <= mac_cycles + 32'd1;
          if (t == 11'(M) + 11'(2 * DIM - 2)) begin
            t <= '0;
            if (kt == KT - 8'd1) begin
              kt <= '0;
              if (nt == NT - 8'd1) state <= G_ST_CMD;
              else begin nt <= nt + 8'd1; state <= G_WLOAD; end
            end else begin
              kt <= kt + 8'd1;
              state <= G_WLOAD;
            end
          end else t <= t + 11'd1;
        end
        G_ST_CMD: begin
          {li, lj, lbase} <= '0;
          if (dma_cmd_ready) state <= G_STORE;
        end
        G_STORE: begin
          if (dma_wr_valid && dma_wr_ready) begin
            if (lj == N - 10'd1) begin
              lj <= '0; li <= li + 10'd1; lbase <= lbase + 20'(NT);
            end else lj <= lj + 10'd1;
          end
          if (dma_done) state <= G_DONE;
        end
        G_DONE: state <= G_IDLE;
        default: state <= G_IDLE;
      endcase
    end
  end

endmodule

// tb_gemm_unit: FPGA.GEMM unit with the shared DMA and a BRAM. Random A (Q8.8)
// and B (Q12.4) matrices of several sizes, including partial 8 x 8 tiles and a
// case that saturates, are multiplied; C is compared element by element with
// a reference computed here (exact sum, arithmetic shift right by 4, clamp to
// 16 bits). The array's streaming time is checked against the schedule
// ceil(N/8) * ceil(K/8) * (M + 15) cycles, and an oversized request must
// raise `error` without writing anything.
module tb_gemm_unit;
  import soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, busy, done, error;
  logic [31:0] dst, aa, ba, cfg, macc;
  logic        cv, cr, rv, rr, wv, wr, dd;
  dma_cmd_t    c;
  logic [15:0] rdat, wdat;
  axi_req_t    areq;
  axi_rsp_t    arsp;

  gemm_unit dut (.clk, .rst_n, .start, .dst_addr(dst), .a_addr(aa), .b_addr(ba), .cfg,
                 .busy, .done, .error, .mac_cycles(macc),
                 .dma_cmd_valid(cv), .dma_cmd_ready(cr), .dma_cmd(c),
                 .dma_rd_valid(rv), .dma_rd_data(rdat), .dma_rd_ready(rr),
                 .dma_wr_valid(wv), .dma_wr_data(wdat), .dma_wr_ready(wr), .dma_done(dd));
  dma_engine u_dma (.clk, .rst_n, .cmd_valid(cv), .cmd_ready(cr), .cmd(c), .rd_valid(rv),
                    .rd_data(rdat), .rd_ready(rr), .wr_valid(wv), .wr_data(wdat), .wr_ready(wr),
                    .done(dd), .axi_req(areq), .axi_rsp(arsp));
  axi_bram #(.BYTES(32768)) u_mem (.clk, .rst_n, .req(areq), .rsp(arsp));

  int checks = 0, failures = 0;
  localparam int AW = 256, BW = 2304, CW = 4352;   // word addresses of A, B, C

  function automatic logic signed [15:0] get(input int base_w, input int e);
    logic [31:0] w;
    w = u_mem.mem[base_w + e / 2];
    return (e % 2) ? w[31:16] : w[15:0];
  endfunction
  task automatic put(input int base_w, input int e, input logic [15:0] v);
    if (e % 2) u_mem.mem[base_w + e / 2][31:16] = v;
    else       u_mem.mem[base_w + e / 2][15:0]  = v;
  endtask

  task automatic issue(input int m, input int n, input int k, output int cyc);
    cyc = 0;
    @(negedge clk);
    dst = CW * 4; aa = AW * 4; ba = BW * 4;
    cfg = {2'b00, 10'(k), 10'(n), 10'(m)};
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  task automatic run(input int m, input int n, input int k, input int amax, input int bmax);
    int cyc, mac0;
    for (int i = 0; i < m * k; i++) put(AW, i, 16'($signed($urandom % (2 * amax)) - amax));
    for (int i = 0; i < k * n; i++) put(BW, i, 16'($signed($urandom % (2 * bmax)) - bmax));
    for (int i = 0; i < m * n + 2; i++) put(CW, i, 16'h5A5A);
    mac0 = int'(macc);
    issue(m, n, k, cyc);
    checks++;
    if (error) begin failures++; $display("FAIL: unexpected error %0dx%0dx%0d", m, n, k); end
    for (int i = 0; i < m; i++)
      for (int j = 0; j < n; j++) begin
        longint s;
        int r;
        s = 0;
        for (int q = 0; q < k; q++) s += longint'(get(AW, i * k + q)) * longint'(get(BW, q * n + j));
        s = s >>> 4;
        r = (s > 32767) ? 32767 : (s < -32768) ? -32768 : int'(s);
        checks++;
        if (int'(get(CW, i * n + j)) != r) begin
          failures++;
          if (failures < 10) $display("FAIL C[%0d][%0d] got %0d exp %0d", i, j, get(CW, i * n + j), r);
        end
      end
    checks++;
    if (get(CW, m * n + 1) != 16'h5A5A || ((m * n) % 2 == 1 && get(CW, m * n) != 16'h5A5A)) begin
      failures++; $display("FAIL: C written past its end");
    end
    checks++;
    if (int'(macc) - mac0 != ((n + 7) / 8) * ((k + 7) / 8) * (m + 15)) begin
      failures++;
      $display("FAIL: %0d streaming cycles, expected %0d", int'(macc) - mac0,
               ((n + 7) / 8) * ((k + 7) / 8) * (m + 15));
    end
    $display("gemm %0dx%0dx%0d: %0d cycles total, %0d streaming", m, n, k, cyc, int'(macc) - mac0);
  endtask

  initial begin
    int cyc;
    start = 0; dst = 0; aa = 0; ba = 0; cfg = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(8, 8, 8, 256, 64);
    run(5, 11, 13, 256, 64);
    run(16, 17, 9, 256, 64);
    run(3, 4, 20, 32767, 32767);   // saturates
    run(1, 1, 1, 256, 64);
    // 100 x 100 A does not fit the 4096-element buffer
    put(CW, 0, 16'h1234);
    issue(100, 8, 100, cyc);
    checks++;
    if (!error || get(CW, 0) != 16'h1234) begin failures++; $display("FAIL: oversize not rejected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_custom_unit: FPGA.CUSTOM unit with the shared DMA and a BRAM. Function
// code 0 (batch normalisation) is run over random Q8.8 vectors with random
// gamma/beta (including saturating ones) and compared with
// y = clamp(((x * gamma) >>> 8) + beta) computed here; lengths that are and
// are not multiples of the 16-element chunk are used, and the word after the
// output must be untouched. Function code 1 (depthwise convolution) is run on
// random tensors for several sizes, kernel sizes, strides and paddings and
// compared with the loop nest computed here, with a guard word after the
// output. Degenerate and oversize configurations, and an unimplemented
// function code, must finish with `error` and write nothing.
module tb_custom_unit;
  import soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, busy, done, error;
  logic [31:0] dst, src, prm;
  logic [6:0]  f7;
  logic        cv, cr, rv, rr, wv, wr, dd;
  dma_cmd_t    c;
  logic [15:0] rdat, wdat;
  axi_req_t    areq;
  axi_rsp_t    arsp;

  custom_unit dut (.clk, .rst_n, .start, .dst_addr(dst), .src_addr(src), .prm_addr(prm),
                   .funct7(f7), .busy, .done, .error,
                   .dma_cmd_valid(cv), .dma_cmd_ready(cr), .dma_cmd(c),
                   .dma_rd_valid(rv), .dma_rd_data(rdat), .dma_rd_ready(rr),
                   .dma_wr_valid(wv), .dma_wr_data(wdat), .dma_wr_ready(wr), .dma_done(dd));
  dma_engine u_dma (.clk, .rst_n, .cmd_valid(cv), .cmd_ready(cr), .cmd(c), .rd_valid(rv),
                    .rd_data(rdat), .rd_ready(rr), .wr_valid(wv), .wr_data(wdat), .wr_ready(wr),
                    .done(dd), .axi_req(areq), .axi_rsp(arsp));
  axi_bram #(.BYTES(16384)) u_mem (.clk, .rst_n, .req(areq), .rsp(arsp));

  int checks = 0, failures = 0;
  localparam int PW = 16, IW = 64, OW = 1024;

  function automatic logic signed [15:0] get(input int base_w, input int e);
    logic [31:0] w;
    w = u_mem.mem[base_w + e / 2];
    return (e % 2) ? w[31:16] : w[15:0];
  endfunction

  task automatic issue(input int fn);
    @(negedge clk);
    dst = OW * 4; src = IW * 4; prm = PW * 4; f7 = 7'(fn);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  localparam int DW_PW = 2048;   // depthwise parameter block (word address)

  task automatic run_dw(input int H, input int W, input int C, input int K, input int S,
                        input int P, input bit expect_err);
    int ho, wo, n_out;
    logic [31:0] cfg;
    cfg = {3'(P), 2'(S), 3'(K), 6'd0, 6'(C), 6'(W), 6'(H)};
    u_mem.mem[DW_PW] = cfg;
    for (int i = 0; i < (K * K * C + 1) / 2; i++)
      u_mem.mem[DW_PW + 1 + i] = {16'($signed($urandom % 64) - 32), 16'($signed($urandom % 64) - 32)};
    for (int i = 0; i < (H * W * C + 1) / 2; i++) u_mem.mem[IW + i] = $urandom;
    if (S == 0) S = 1;
    ho = expect_err ? 0 : (H + 2 * P - K) / S + 1;
    wo = expect_err ? 0 : (W + 2 * P - K) / S + 1;
    n_out = ho * wo * C;
    u_mem.mem[OW + (n_out + 1) / 2] = 32'hCAFE_F00D;
    u_mem.mem[OW + (n_out + 1) / 2 + 1] = 32'hCAFE_F00D;
    @(negedge clk);
    dst = OW * 4; src = IW * 4; prm = DW_PW * 4; f7 = 7'd1;
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (error != expect_err) begin failures++; $display("FAIL: depthwise error flag %0b", error); end
    for (int oh = 0; oh < ho; oh++)
      for (int ow = 0; ow < wo; ow++)
        for (int c = 0; c < C; c++) begin
          automatic longint s = 0;
          automatic int r;
          for (int kh = 0; kh < K; kh++)
            for (int kw = 0; kw < K; kw++) begin
              automatic int y = oh * S + kh - P, x = ow * S + kw - P;
              if (y >= 0 && y < H && x >= 0 && x < W)
                s += longint'(get(IW, (y * W + x) * C + c)) * longint'(get(DW_PW + 1, (kh * K + kw) * C + c));
            end
          s = s >>> 4;
          r = (s > 32767) ? 32767 : (s < -32768) ? -32768 : int'(s);
          checks++;
          if (int'(get(OW, (oh * wo + ow) * C + c)) != r) begin
            failures++;
            if (failures < 10) $display("FAIL dw %0dx%0dx%0d K%0d S%0d P%0d at (%0d,%0d,%0d): got %0d exp %0d",
                                        H, W, C, K, S, P, oh, ow, c, get(OW, (oh * wo + ow) * C + c), r);
          end
        end
    checks++;
    if (u_mem.mem[OW + (n_out + 1) / 2 + 1] != 32'hCAFE_F00D ||
        (n_out % 2 == 0 && u_mem.mem[OW + n_out / 2] != 32'hCAFE_F00D) ||
        (n_out % 2 == 1 && u_mem.mem[OW + n_out / 2][31:16] != 16'hCAFE)) begin
      failures++; $display("FAIL: depthwise wrote past its output");
    end
  endtask

  task automatic run(input int len, input logic [15:0] g, input logic [15:0] b);
    u_mem.mem[PW]     = 32'(len);
    u_mem.mem[PW + 1] = {b, g};
    for (int i = 0; i < (len + 1) / 2; i++) u_mem.mem[IW + i] = $urandom;
    u_mem.mem[OW + (len + 1) / 2] = 32'hCAFE_F00D;
    issue(0);
    checks++;
    if (error) begin failures++; $display("FAIL: unexpected error"); end
    for (int e = 0; e < len; e++) begin
      longint s;
      int r;
      s = ((longint'(get(IW, e)) * longint'($signed(g))) >>> 8) + longint'($signed(b));
      r = (s > 32767) ? 32767 : (s < -32768) ? -32768 : int'(s);
      checks++;
      if (int'(get(OW, e)) != r) begin
        failures++;
        if (failures < 10) $display("FAIL e=%0d x=%0d got %0d exp %0d", e, get(IW, e), get(OW, e), r);
      end
    end
    checks++;
    if (u_mem.mem[OW + (len + 1) / 2] != 32'hCAFE_F00D) begin failures++; $display("FAIL: past end"); end
  endtask

  initial begin
    start = 0; dst = 0; src = 0; prm = 0; f7 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(16, 16'h0100, 16'h0000);   // identity
    run(37, 16'h0180, 16'hFF00);   // gamma 1.5, beta -1
    run(5, 16'h7FFF, 16'h4000);    // saturating
    run(64, 16'($urandom), 16'($urandom));
    // depthwise convolution
    run_dw(8, 8, 8, 3, 1, 1, 0);
    run_dw(7, 5, 3, 3, 2, 1, 0);
    run_dw(6, 6, 4, 5, 1, 2, 0);
    run_dw(4, 4, 5, 1, 0, 0, 0);    // stride field 0 means 1
    run_dw(9, 9, 2, 3, 3, 0, 0);
    run_dw(5, 5, 0, 3, 1, 1, 1);    // no channels
    run_dw(63, 63, 2, 3, 1, 1, 1);  // input does not fit
    run_dw(2, 2, 1, 5, 1, 0, 1);    // kernel larger than the image
    // unimplemented function code
    u_mem.mem[OW] = 32'h1111_2222;
    issue(5);
    checks++;
    if (!error || u_mem.mem[OW] != 32'h1111_2222) begin failures++; $display("FAIL: funct7=5"); end
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

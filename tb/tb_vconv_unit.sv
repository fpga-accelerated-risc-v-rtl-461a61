// tb_vconv_unit: FPGA.VCONV unit with the shared DMA and a BRAM. Random Q8.8
// inputs and Q12.4 kernels for several shapes (3x3 with padding, stride 2,
// 1x1, channel counts that do not fill the 4 x 4 array) are convolved and the
// HWC output is compared with a direct loop-nest reference computed here.
// The array's streaming time is checked against the schedule: one tile of
// 4 pixels x 4 output channels takes K*K*C_in + 7 streaming cycles. An
// oversized configuration must raise `error` and leave memory untouched. The
// input is streamed in while the tiles are computed: the test counts cycles
// in which the array streams while the input transfer is still running, and
// fails if that never happens.
module tb_vconv_unit;
  import soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, busy, done, error;
  logic [31:0] dst, ia, wa, cfg, macc;
  logic        cv, cr, rv, rr, wv, wr, dd;
  dma_cmd_t    c;
  logic [15:0] rdat, wdat;
  axi_req_t    areq;
  axi_rsp_t    arsp;

  vconv_unit dut (.clk, .rst_n, .start, .dst_addr(dst), .in_addr(ia), .w_addr(wa), .cfg,
                  .busy, .done, .error, .mac_cycles(macc),
                  .dma_cmd_valid(cv), .dma_cmd_ready(cr), .dma_cmd(c),
                  .dma_rd_valid(rv), .dma_rd_data(rdat), .dma_rd_ready(rr),
                  .dma_wr_valid(wv), .dma_wr_data(wdat), .dma_wr_ready(wr), .dma_done(dd));
  dma_engine u_dma (.clk, .rst_n, .cmd_valid(cv), .cmd_ready(cr), .cmd(c), .rd_valid(rv),
                    .rd_data(rdat), .rd_ready(rr), .wr_valid(wv), .wr_data(wdat), .wr_ready(wr),
                    .done(dd), .axi_req(areq), .axi_rsp(arsp));
  axi_bram #(.BYTES(32768)) u_mem (.clk, .rst_n, .req(areq), .rsp(arsp));

  int checks = 0, failures = 0;
  localparam int IW = 256, KW = 2304, OW = 4352;   // word addresses

  function automatic logic signed [15:0] get(input int base_w, input int e);
    logic [31:0] w;
    w = u_mem.mem[base_w + e / 2];
    return (e % 2) ? w[31:16] : w[15:0];
  endfunction
  task automatic put(input int base_w, input int e, input logic [15:0] v);
    if (e % 2) u_mem.mem[base_w + e / 2][31:16] = v;
    else       u_mem.mem[base_w + e / 2][15:0]  = v;
  endtask

  task automatic issue(input int h, input int w, input int ci, input int co, input int k,
                       input int s, input int p);
    @(negedge clk);
    dst = OW * 4; ia = IW * 4; wa = KW * 4;
    cfg = {3'(p), 2'(s), 3'(k), 6'(co), 6'(ci), 6'(w), 6'(h)};
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic run(input int h, input int w, input int ci, input int co, input int k,
                     input int s, input int p);
    int ho, wo, mac0, tiles;
    ho = (h + 2 * p - k) / s + 1;
    wo = (w + 2 * p - k) / s + 1;
    for (int i = 0; i < h * w * ci; i++) put(IW, i, 16'($signed($urandom % 1024) - 512));
    for (int i = 0; i < k * k * ci * co; i++) put(KW, i, 16'($signed($urandom % 128) - 64));
    for (int i = 0; i < ho * wo * co + 2; i++) put(OW, i, 16'h5A5A);
    mac0 = int'(macc);
    issue(h, w, ci, co, k, s, p);
    checks++;
    if (error) begin failures++; $display("FAIL: unexpected error"); end
    for (int oh = 0; oh < ho; oh++)
      for (int ow = 0; ow < wo; ow++)
        for (int o = 0; o < co; o++) begin
          longint acc;
          int r, e;
          acc = 0;
          for (int kh = 0; kh < k; kh++)
            for (int kw = 0; kw < k; kw++)
              for (int i = 0; i < ci; i++) begin
                int y, x;
                y = oh * s + kh - p;
                x = ow * s + kw - p;
                if (y >= 0 && y < h && x >= 0 && x < w)
                  acc += longint'(get(IW, (y * w + x) * ci + i)) *
                         longint'(get(KW, ((kh * k + kw) * ci + i) * co + o));
              end
          acc = acc >>> 4;
          r = (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : int'(acc);
          e = (oh * wo + ow) * co + o;
          checks++;
          if (int'(get(OW, e)) != r) begin
            failures++;
            if (failures < 10) $display("FAIL out[%0d][%0d][%0d] got %0d exp %0d", oh, ow, o, get(OW, e), r);
          end
        end
    checks++;
    if (get(OW, ho * wo * co + 1) != 16'h5A5A) begin failures++; $display("FAIL: write past end"); end
    tiles = ((ho * wo + 3) / 4) * ((co + 3) / 4);
    checks++;
    if (int'(macc) - mac0 != tiles * (k * k * ci + 7)) begin
      failures++;
      $display("FAIL: %0d streaming cycles, expected %0d", int'(macc) - mac0, tiles * (k * k * ci + 7));
    end
  endtask

  int n_overlap = 0;
  always @(posedge clk) if (dut.stepping && dut.in_loading) n_overlap++;

  initial begin
    start = 0; dst = 0; ia = 0; wa = 0; cfg = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(6, 5, 3, 5, 3, 1, 1);
    run(7, 7, 2, 4, 3, 2, 0);
    run(4, 4, 8, 8, 1, 1, 0);
    run(5, 3, 1, 1, 2, 1, 0);
    run(8, 8, 4, 6, 5, 1, 2);
    run(16, 16, 8, 4, 3, 1, 1);
    $display("array streaming while the input was still arriving: %0d cycles", n_overlap);
    checks++;
    if (n_overlap == 0) begin failures++; $display("FAIL: no overlap of input transfer and compute"); end
    // 63 x 63 x 8 input does not fit the 8192-element buffer
    put(OW, 0, 16'h1234);
    issue(63, 63, 8, 4, 3, 1, 1);
    checks++;
    if (!error || get(OW, 0) != 16'h1234) begin failures++; $display("FAIL: oversize not rejected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

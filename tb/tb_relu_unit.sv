// tb_relu_unit: FPGA.RELU unit with the shared DMA and a BRAM. Random Q8.8
// vectors (lengths that are and are not multiples of 16) go through each of
// the four functions; results are compared with values computed here: ReLU,
// ReLU6 and LeakyReLU exactly, GELU (tanh form, evaluated at the table's grid
// point) within 1 LSB. Also checks that memory next to the output is untouched
// and that the run length is one DMA read and write per 16-element chunk.
module tb_relu_unit;
  import soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, busy, done;
  logic [31:0] dst, src;
  logic [19:0] n;
  logic [1:0]  func;
  logic        cv, cr, rv, rr, wv, wr, dd;
  dma_cmd_t    c;
  logic [15:0] rdat, wdat;
  axi_req_t    areq;
  axi_rsp_t    arsp;

  relu_unit dut (.clk, .rst_n, .start, .dst_addr(dst), .src_addr(src), .n_elem(n), .func,
                 .busy, .done, .dma_cmd_valid(cv), .dma_cmd_ready(cr), .dma_cmd(c),
                 .dma_rd_valid(rv), .dma_rd_data(rdat), .dma_rd_ready(rr),
                 .dma_wr_valid(wv), .dma_wr_data(wdat), .dma_wr_ready(wr), .dma_done(dd));
  dma_engine u_dma (.clk, .rst_n, .cmd_valid(cv), .cmd_ready(cr), .cmd(c), .rd_valid(rv),
                    .rd_data(rdat), .rd_ready(rr), .wr_valid(wv), .wr_data(wdat), .wr_ready(wr),
                    .done(dd), .axi_req(areq), .axi_rsp(arsp));
  axi_bram #(.BYTES(16384)) u_mem (.clk, .rst_n, .req(areq), .rsp(arsp));

  int checks = 0, failures = 0, cmds = 0;
  always @(posedge clk) if (cv && cr) cmds++;

  function automatic logic [15:0] elem(input int base_w, input int e);
    logic [31:0] w;
    w = u_mem.mem[base_w + e / 2];
    return (e % 2) ? w[31:16] : w[15:0];
  endfunction

  function automatic int ref_act(input int f, input logic signed [15:0] x);
    real g, y;
    case (f)
      0: return (x < 0) ? 0 : int'(x);
      1: return (x < 0) ? 0 : (x > 16'sh0600) ? 16'sh0600 : int'(x);
      2: return (x < 0) ? int'(x >>> 3) : int'(x);
      default: begin
        if (x >= 1024) return int'(x);
        if (x < -1024) return 0;
        g = -4.0 + real'((int'(x) + 1024) / 8) / 32.0;
        y = 0.5 * g * (1.0 + $tanh(0.7978845608 * (g + 0.044715 * g * g * g)));
        return int'($floor(y * 256.0 + 0.5));
      end
    endcase
  endfunction

  task automatic run(input int f, input int len);
    int cycles = 0, c0;
    int in_w = 64, out_w = 2048;
    for (int i = 0; i < (len + 1) / 2; i++)
      u_mem.mem[in_w + i] = {16'($signed($urandom % 4096) - 2048), 16'($signed($urandom % 4096) - 2048)};
    u_mem.mem[out_w + (len + 1) / 2] = 32'hCAFE_F00D;
    c0 = cmds;
    @(negedge clk);
    dst = out_w * 4; src = in_w * 4; n = 20'(len); func = 2'(f);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cycles++; end
    for (int e = 0; e < len; e++) begin
      int exp_v, got;
      exp_v = ref_act(f, elem(in_w, e));
      got = int'($signed(elem(out_w, e)));
      checks++;
      if ((f < 3 && got != exp_v) || (f == 3 && (got - exp_v > 1 || exp_v - got > 1))) begin
        failures++;
        $display("FAIL f=%0d e=%0d x=%h got=%0d exp=%0d", f, e, elem(in_w, e), got, exp_v);
      end
    end
    checks++;
    if (u_mem.mem[out_w + (len + 1) / 2] != 32'hCAFE_F00D) begin
      failures++; $display("FAIL: write past end");
    end
    checks++;
    if (cmds - c0 != 2 * ((len + 15) / 16)) begin
      failures++; $display("FAIL: %0d DMA commands for %0d elements", cmds - c0, len);
    end
  endtask

  initial begin
    start = 0; dst = 0; src = 0; n = 0; func = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++) begin
      run(f, 37);
      run(f, 64);
    end
    run(3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

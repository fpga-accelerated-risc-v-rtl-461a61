// tb_dma_engine: the shared DMA against the BRAM model. Reads of random
// length (odd and even, single and multiple bursts) must deliver the packed
// 16-bit elements in order; writes must pack elements back into words,
// leaving the upper half of an odd final word untouched. Random back-pressure
// on the element streams. A read of 40 words must issue 3 bursts.
module tb_dma_engine;
  import soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cmd_valid, cmd_ready, rd_valid, rd_ready, wr_valid, wr_ready, done;
  dma_cmd_t    cmd;
  logic [15:0] rd_data, wr_data;
  axi_req_t    axi_req;
  axi_rsp_t    axi_rsp;

  dma_engine dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .rd_valid, .rd_data, .rd_ready,
                  .wr_valid, .wr_data, .wr_ready, .done, .axi_req, .axi_rsp);
  axi_bram #(.BYTES(16384)) u_mem (.clk, .rst_n, .req(axi_req), .rsp(axi_rsp));

  int checks = 0, failures = 0;
  int ar_count = 0;
  always @(posedge clk) if (axi_req.ar_valid && axi_rsp.ar_ready) ar_count++;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] elem(input int base_w, input int e);
    logic [31:0] w;
    w = u_mem.mem[base_w + e / 2];
    return (e % 2) ? w[31:16] : w[15:0];
  endfunction

  task automatic do_read(input int base_w, input int n);
    int got = 0;
    @(negedge clk);
    cmd = '{write: 1'b0, addr: 32'(base_w * 4), n_elem: 20'(n)};
    cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
    while (!done) begin
      rd_ready = ($urandom % 4) != 0;
      if (rd_valid && rd_ready) begin
        check(rd_data == elem(base_w, got), $sformatf("read elem %0d of %0d", got, n));
        got++;
      end
      @(negedge clk);
    end
    rd_ready = 0;
    check(got == n, $sformatf("read count %0d/%0d", got, n));
  endtask

  task automatic do_write(input int base_w, input int n, input logic [15:0] seed);
    int sent = 0;
    logic [31:0] guard;
    guard = u_mem.mem[base_w + (n + 1) / 2];
    if (n % 2) u_mem.mem[base_w + n / 2] = 32'hDEAD_0000;
    @(negedge clk);
    cmd = '{write: 1'b1, addr: 32'(base_w * 4), n_elem: 20'(n)};
    cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
    while (!done) begin
      wr_valid = (sent < n) && (($urandom % 3) != 0);
      wr_data  = seed + 16'(sent * 7);
      #1;
      if (wr_valid && wr_ready) sent++;
      @(negedge clk);
    end
    wr_valid = 0;
    for (int e = 0; e < n; e++)
      check(elem(base_w, e) == 16'(seed + 16'(e * 7)), $sformatf("write elem %0d of %0d", e, n));
    if (n % 2) check(u_mem.mem[base_w + n / 2][31:16] == 16'hDEAD, "odd tail untouched");
    check(u_mem.mem[base_w + (n + 1) / 2] == guard, "no write past the end");
  endtask

  initial begin
    cmd_valid = 0; rd_ready = 0; wr_valid = 0; wr_data = 0; cmd = '0;
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    begin
      int ar0;
      ar0 = ar_count;
      do_read(100, 80);           // 40 words = 16 + 16 + 8
      check(ar_count - ar0 == 3, "40-word read uses 3 bursts");
    end
    do_read(7, 1);
    do_read(300, 33);
    do_read(1000, 2);
    do_write(2000, 1, 16'h1111);
    do_write(2100, 37, 16'h2222);
    do_write(2200, 64, 16'h3333);
    do_read(2100, 37);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_icache: instruction cache on a BRAM filled with random words. 4000
// fetches: runs of sequential addresses from random starting points over
// 16 KB (four times the cache, so lines conflict and are replaced). Each
// fetch is compared with memory. Also checked: a fetch whose line was just
// fetched returns in the cycle of the request (hit, no wait); a miss costs
// exactly one 8-beat read burst that starts at the line base; after `inval`
// the next fetch of a cached line misses again.
module tb_icache;
  import soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        inval, req, ready;
  logic [31:0] addr, rdata;
  axi_req_t    areq;
  axi_rsp_t    arsp;

  icache dut (.clk, .rst_n, .inval, .req, .addr, .rdata, .ready, .axi_req(areq), .axi_rsp(arsp));
  axi_bram #(.BYTES(16384)) u_mem (.clk, .rst_n, .req(areq), .rsp(arsp));

  int checks = 0, failures = 0, n_ar = 0;
  always @(posedge clk) if (areq.ar_valid && arsp.ar_ready) begin
    n_ar++;
    if (areq.ar.len != 8'd7 || areq.ar.addr[4:0] != 5'd0) begin
      failures++; $display("FAIL: refill burst %h len %0d", areq.ar.addr, areq.ar.len);
    end
  end

  task automatic fetch(input logic [31:0] a, output logic [31:0] q, output int waits);
    waits = 0;
    @(negedge clk);
    req = 1; addr = a;
    #1;
    while (!ready) begin @(negedge clk); #1; waits++; end
    q = rdata;
    @(posedge clk);
    #1 req = 0;
  endtask

  initial begin
    logic [31:0] q, a;
    int waits, ar0;
    logic [31:0] last_line;
    inval = 0; req = 0; addr = 0;
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    last_line = 32'hFFFF_FFFF;
    a = 0;
    for (int n = 0; n < 4000; n++) begin
      if ($urandom % 8 == 0) a = {18'd0, 12'($urandom), 2'b00};
      ar0 = n_ar;
      fetch(a, q, waits);
      checks++;
      if (q != u_mem.mem[a[13:2]]) begin failures++; $display("FAIL: fetch %h", a); end
      checks++;
      if (a[31:5] == last_line[31:5] && (waits != 0 || n_ar != ar0)) begin
        failures++; $display("FAIL: same-line fetch did not hit");
      end
      checks++;
      if (n_ar - ar0 > 1) begin failures++; $display("FAIL: more than one burst for a miss"); end
      last_line = a;
      a = a + 4;
      a[31:14] = '0;
    end
    // invalidate: a line that hits must miss afterwards
    fetch(32'h100, q, waits);
    fetch(32'h104, q, waits);
    checks++;
    if (waits != 0) begin failures++; $display("FAIL: hit expected"); end
    @(negedge clk); inval = 1; @(negedge clk); inval = 0;
    ar0 = n_ar;
    fetch(32'h104, q, waits);
    checks++;
    if (n_ar != ar0 + 1 || q != u_mem.mem[65]) begin failures++; $display("FAIL: invalidate"); end
    $display("bursts=%0d", n_ar);
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

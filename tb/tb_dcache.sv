// tb_dcache: data cache on a BRAM. 3000 random loads and stores (random byte
// enables) over 16 KB, four times the cache, so lines conflict and are
// replaced; every load is compared with a shadow copy of memory kept here,
// and the BRAM itself is compared with the shadow at the end (write-through).
// Also checked: a load that repeats the previous load's line completes in the
// cycle of the request (hit, no wait), a load miss costs exactly one read
// burst of 8 beats, stores never allocate (no read burst), and after memory is
// changed behind the cache, `inval` makes the next load return the new data.
module tb_dcache;
  import soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        inval, req, we, ready;
  logic [3:0]  be;
  logic [31:0] addr, wdata, rdata;
  axi_req_t    areq;
  axi_rsp_t    arsp;

  dcache dut (.clk, .rst_n, .inval, .req, .we, .be, .addr, .wdata, .rdata, .ready,
              .axi_req(areq), .axi_rsp(arsp));
  axi_bram #(.BYTES(16384)) u_mem (.clk, .rst_n, .req(areq), .rsp(arsp));

  int checks = 0, failures = 0, n_ar = 0, n_beats = 0;
  always @(posedge clk) begin
    if (areq.ar_valid && arsp.ar_ready) begin
      n_ar++;
      if (areq.ar.len != 8'd7) begin failures++; $display("FAIL: refill burst length"); end
    end
    if (arsp.r_valid && areq.r_ready) n_beats++;
  end

  logic [31:0] shadow [4096];

  // one access; returns the number of wait cycles
  task automatic access(input bit w, input logic [31:0] a, input logic [3:0] b,
                        input logic [31:0] d, output logic [31:0] q, output int waits);
    waits = 0;
    @(negedge clk);
    req = 1; we = w; addr = a; be = b; wdata = d;
    #1;
    while (!ready) begin @(negedge clk); #1; waits++; end
    q = rdata;
    @(posedge clk);
    #1 req = 0;
  endtask

  initial begin
    logic [31:0] q, a;
    int waits, ar0;
    inval = 0; req = 0; we = 0; be = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 4096; i++) begin
      shadow[i] = $urandom;
      u_mem.mem[i] = shadow[i];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      a = {18'd0, 12'($urandom % 4096), 2'b00};
      if ($urandom % 3 == 0) begin
        logic [3:0]  b;
        logic [31:0] d;
        b = 4'($urandom);
        d = $urandom;
        ar0 = n_ar;
        access(1, a, b, d, q, waits);
        for (int k = 0; k < 4; k++) if (b[k]) shadow[a[13:2]][8*k +: 8] = d[8*k +: 8];
        checks++;
        if (n_ar != ar0) begin failures++; $display("FAIL: store allocated a line"); end
      end else begin
        ar0 = n_ar;
        access(0, a, 4'hF, 0, q, waits);
        checks++;
        if (q != shadow[a[13:2]]) begin
          failures++;
          $display("FAIL: load %h got %h exp %h", a, q, shadow[a[13:2]]);
        end
        checks++;
        if (n_ar - ar0 > 1) begin failures++; $display("FAIL: more than one refill per miss"); end
        // the same line again: must hit without waiting
        access(0, a ^ 32'h4, 4'hF, 0, q, waits);
        checks++;
        if (waits != 0 || q != shadow[(a ^ 32'h4) >> 2]) begin
          failures++; $display("FAIL: hit took %0d waits or returned wrong data", waits);
        end
      end
    end
    checks++;
    if (n_beats != 8 * n_ar) begin failures++; $display("FAIL: refill beats %0d for %0d bursts", n_beats, n_ar); end
    for (int i = 0; i < 4096; i++) begin
      checks++;
      if (u_mem.mem[i] != shadow[i]) begin failures++; $display("FAIL: memory word %0d", i); end
    end
    // invalidate
    access(0, 32'h40, 4'hF, 0, q, waits);
    u_mem.mem[16] = 32'hDEAD_BEEF;
    access(0, 32'h40, 4'hF, 0, q, waits);
    checks++;
    if (q != shadow[16]) begin failures++; $display("FAIL: expected stale hit before invalidate"); end
    @(negedge clk); inval = 1; @(negedge clk); inval = 0;
    access(0, 32'h40, 4'hF, 0, q, waits);
    checks++;
    if (q != 32'hDEAD_BEEF || waits == 0) begin failures++; $display("FAIL: invalidate"); end
    $display("read bursts=%0d", n_ar);
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

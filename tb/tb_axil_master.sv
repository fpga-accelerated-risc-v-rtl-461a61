// tb_axil_master: the core-side to AXI4-Lite bridge against a behavioural
// AXI4-Lite slave written here, whose ready and response signals come after
// random delays. 500 random reads and writes (random byte enables) to a
// 16-word register file in the slave are compared with a shadow copy; the
// test checks that each access produces exactly one AXI4-Lite transaction,
// that `ready` is given only once the response has arrived, and that the
// address and data reach the slave unchanged.
module tb_axil_master;
  import soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req, we, ready;
  logic [3:0]  be;
  logic [31:0] addr, wdata, rdata;
  axil_req_t   lreq;
  axil_rsp_t   lrsp;

  axil_master dut (.clk, .rst_n, .req, .we, .be, .addr, .wdata, .rdata, .ready,
                   .axil_req(lreq), .axil_rsp(lrsp));

  // behavioural slave
  logic [31:0] regs [16];
  logic        aw_got, w_got;
  logic [31:0] aw_a, w_d;
  logic [3:0]  w_s;
  int n_aw = 0, n_w = 0, n_ar = 0, n_b = 0, n_r = 0;
  int b_delay, r_delay;
  logic [31:0] ar_a;
  logic        ar_got;

  always @(negedge clk) begin
    lrsp.aw_ready <= !aw_got && ($urandom % 3 == 0);
    lrsp.w_ready  <= !w_got && ($urandom % 3 == 0);
    lrsp.ar_ready <= !ar_got && ($urandom % 3 == 0);
  end
  always @(posedge clk) if (rst_n) begin
    if (lreq.aw_valid && lrsp.aw_ready) begin aw_got <= 1; aw_a <= lreq.aw_addr; n_aw++; end
    if (lreq.w_valid && lrsp.w_ready) begin w_got <= 1; w_d <= lreq.w_data; w_s <= lreq.w_strb; n_w++; end
    if (aw_got && w_got && !lrsp.b_valid) begin
      if (b_delay == 0) begin
        for (int k = 0; k < 4; k++) if (w_s[k]) regs[aw_a[5:2]][8*k +: 8] <= w_d[8*k +: 8];
        lrsp.b_valid <= 1;
        b_delay <= $urandom % 4;
      end else b_delay <= b_delay - 1;
    end
    if (lrsp.b_valid && lreq.b_ready) begin lrsp.b_valid <= 0; aw_got <= 0; w_got <= 0; n_b++; end
    if (lreq.ar_valid && lrsp.ar_ready) begin ar_got <= 1; ar_a <= lreq.ar_addr; n_ar++; end
    if (ar_got && !lrsp.r_valid) begin
      if (r_delay == 0) begin
        lrsp.r_valid <= 1;
        lrsp.r_data  <= regs[ar_a[5:2]];
        r_delay <= $urandom % 4;
      end else r_delay <= r_delay - 1;
    end
    if (lrsp.r_valid && lreq.r_ready) begin lrsp.r_valid <= 0; ar_got <= 0; n_r++; end
  end

  int checks = 0, failures = 0;
  logic [31:0] shadow [16];

  initial begin
    lrsp = '0;
    aw_got = 0; w_got = 0; ar_got = 0; b_delay = 1; r_delay = 2;
    aw_a = 0; w_d = 0; w_s = 0; ar_a = 0;
    req = 0; we = 0; be = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 16; i++) begin regs[i] = $urandom; shadow[i] = regs[i]; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      int idx, t0;
      bit w;
      idx = $urandom % 16;
      w = $urandom % 2;
      t0 = w ? n_b : n_r;
      @(negedge clk);
      req = 1; we = w; be = 4'($urandom); wdata = $urandom;
      addr = 32'hA000_0000 | 32'(idx * 4);
      #1;
      while (!ready) begin @(negedge clk); #1; end
      checks++;
      if ((w ? n_b : n_r) != t0 + 1 && !(lrsp.b_valid || lrsp.r_valid)) begin
        failures++; $display("FAIL: ready before the response");
      end
      if (w) begin
        for (int k = 0; k < 4; k++) if (be[k]) shadow[idx][8*k +: 8] = wdata[8*k +: 8];
      end else begin
        checks++;
        if (rdata != shadow[idx]) begin failures++; $display("FAIL: read %0d got %h exp %h", idx, rdata, shadow[idx]); end
      end
      @(posedge clk);
      #1 req = 0;
    end
    repeat (10) @(posedge clk);
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (regs[i] != shadow[i]) begin failures++; $display("FAIL: slave register %0d", i); end
    end
    checks++;
    if (n_aw != n_w || n_aw != n_b || n_ar != n_r || n_aw + n_ar != 500) begin
      failures++; $display("FAIL: transactions aw=%0d w=%0d b=%0d ar=%0d r=%0d", n_aw, n_w, n_b, n_ar, n_r);
    end
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

// tb_axi_arbiter: three AXI4 masters (each a process in this testbench)
// share one BRAM through the round-robin arbiter. Each master repeatedly
// writes a random burst (1-16 beats, random byte strobes) to its own 4 KB
// region and reads a random burst back, comparing with its own shadow copy.
// The test also records the order of grants: while more than one master is
// waiting, no master may be granted twice in a row (round robin), every
// master must be granted, and contention must actually occur.
module tb_axi_arbiter;
  import soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axi_req_t m_req [3];
  axi_rsp_t m_rsp [3];
  axi_req_t s_req;
  axi_rsp_t s_rsp;

  axi_arbiter #(.NM(3)) dut (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);
  axi_bram #(.BYTES(16384)) u_mem (.clk, .rst_n, .req(s_req), .rsp(s_rsp));

  int checks = 0, failures = 0, finished = 0;
  int grants [3] = '{0, 0, 0};
  int last_g = -1, contended = 0, rr_viol = 0;

  always @(posedge clk) if (rst_n) begin
    int w, g;
    w = 0; g = -1;
    for (int m = 0; m < 3; m++) begin
      if (m_req[m].ar_valid || m_req[m].aw_valid) w++;
      if ((m_req[m].ar_valid && m_rsp[m].ar_ready) || (m_req[m].aw_valid && m_rsp[m].aw_ready)) g = m;
    end
    if (g >= 0) begin
      grants[g]++;
      if (w > 1) begin
        contended++;
        if (g == last_g) rr_viol++;
      end
      last_g = g;
    end
  end

  for (genvar gm = 0; gm < 3; gm++) begin : g_master
    logic [31:0] shadow [1024];
    initial begin
      m_req[gm] = '0;
      for (int i = 0; i < 1024; i++) shadow[i] = '0;
      @(posedge rst_n);
      for (int n = 0; n < 60; n++) begin
        int len, base;
        len  = 1 + ($urandom % 16);
        base = $urandom % (1024 - 16);
        // write burst
        @(negedge clk);
        m_req[gm].aw = '{addr: 32'(gm * 4096 + base * 4), len: 8'(len - 1), size: AXI_SIZE4, burst: AXI_INCR};
        m_req[gm].aw_valid = 1;
        while (!m_rsp[gm].aw_ready) @(negedge clk);
        @(negedge clk);
        m_req[gm].aw_valid = 0;
        for (int b = 0; b < len; b++) begin
          logic [31:0] d;
          logic [3:0]  s;
          d = $urandom; s = 4'($urandom);
          m_req[gm].w = '{data: d, strb: s, last: (b == len - 1)};
          m_req[gm].w_valid = 1;
          while (!m_rsp[gm].w_ready) @(negedge clk);
          for (int k = 0; k < 4; k++) if (s[k]) shadow[base + b][8*k +: 8] = d[8*k +: 8];
          @(negedge clk);
        end
        m_req[gm].w_valid = 0;
        m_req[gm].b_ready = 1;
        while (!m_rsp[gm].b_valid) @(negedge clk);
        @(negedge clk);
        m_req[gm].b_ready = 0;
        // read burst
        len  = 1 + ($urandom % 16);
        base = $urandom % (1024 - 16);
        m_req[gm].ar = '{addr: 32'(gm * 4096 + base * 4), len: 8'(len - 1), size: AXI_SIZE4, burst: AXI_INCR};
        m_req[gm].ar_valid = 1;
        while (!m_rsp[gm].ar_ready) @(negedge clk);
        @(negedge clk);
        m_req[gm].ar_valid = 0;
        m_req[gm].r_ready = 1;
        for (int b = 0; b < len; b++) begin
          while (!m_rsp[gm].r_valid) @(negedge clk);
          checks++;
          if (m_rsp[gm].r.data != shadow[base + b] || m_rsp[gm].r.last != (b == len - 1)) begin
            failures++;
            $display("FAIL: master %0d beat %0d got %h exp %h", gm, b, m_rsp[gm].r.data, shadow[base + b]);
          end
          @(negedge clk);
        end
        m_req[gm].r_ready = 0;
        repeat ($urandom % 3) @(negedge clk);
      end
      finished++;
    end
  end

  initial begin
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (finished == 3);
    for (int m = 0; m < 3; m++) begin
      checks++;
      if (grants[m] != 120) begin failures++; $display("FAIL: master %0d granted %0d times", m, grants[m]); end
    end
    checks++;
    if (contended == 0) begin failures++; $display("FAIL: no contention"); end
    checks++;
    if (rr_viol != 0) begin failures++; $display("FAIL: %0d round-robin violations", rr_viol); end
    $display("contended grants=%0d", contended);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

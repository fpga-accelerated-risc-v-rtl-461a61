// tb_axi_bram: the 64 KB AXI4 BRAM at its default size, driven by a master
// process in this testbench. 300 random write bursts (1-16 beats, random
// byte strobes, addresses over the whole 64 KB) and read bursts are compared
// with a shadow copy kept here. With RREADY held high, a read burst must
// deliver one beat per cycle, the first beat in the cycle after the address
// handshake, and RLAST must mark exactly the last beat; a write burst must
// accept one beat per cycle and answer with one OKAY response.
module tb_axi_bram;
  import soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axi_req_t req;
  axi_rsp_t rsp;

  axi_bram dut (.clk, .rst_n, .req, .rsp);

  int checks = 0, failures = 0;
  logic [31:0] shadow [16384];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    req = '0;
    for (int i = 0; i < 16384; i++) begin shadow[i] = $urandom; dut.mem[i] = shadow[i]; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int len, base, cyc;
      len  = 1 + ($urandom % 16);
      base = $urandom % (16384 - 16);
      @(negedge clk);
      req.aw = '{addr: 32'(base * 4), len: 8'(len - 1), size: AXI_SIZE4, burst: AXI_INCR};
      req.aw_valid = 1;
      while (!rsp.aw_ready) @(negedge clk);
      @(negedge clk);
      req.aw_valid = 0;
      cyc = 0;
      for (int b = 0; b < len; b++) begin
        logic [31:0] d;
        logic [3:0]  s;
        d = $urandom; s = 4'($urandom);
        req.w = '{data: d, strb: s, last: (b == len - 1)};
        req.w_valid = 1;
        while (!rsp.w_ready) begin @(negedge clk); cyc++; end
        for (int k = 0; k < 4; k++) if (s[k]) shadow[base + b][8*k +: 8] = d[8*k +: 8];
        @(negedge clk);
      end
      req.w_valid = 0;
      check(cyc == 0, "write beats accepted one per cycle");
      req.b_ready = 1;
      while (!rsp.b_valid) @(negedge clk);
      check(rsp.b_resp == 2'b00, "OKAY write response");
      @(negedge clk);
      req.b_ready = 0;

      len  = 1 + ($urandom % 16);
      base = $urandom % (16384 - 16);
      req.ar = '{addr: 32'(base * 4), len: 8'(len - 1), size: AXI_SIZE4, burst: AXI_INCR};
      req.ar_valid = 1;
      req.r_ready  = 1;
      while (!rsp.ar_ready) @(negedge clk);
      @(negedge clk);
      req.ar_valid = 0;
      for (int b = 0; b < len; b++) begin
        check(rsp.r_valid, "read beat in every cycle");
        check(rsp.r.data == shadow[base + b], "read data");
        check(rsp.r.last == (b == len - 1), "RLAST on the last beat only");
        @(negedge clk);
      end
      check(!rsp.r_valid, "no extra beat");
      req.r_ready = 0;
    end
    for (int i = 0; i < 16384; i++)
      if (dut.mem[i] != shadow[i]) begin failures++; $display("FAIL: word %0d", i); end
    checks++;
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

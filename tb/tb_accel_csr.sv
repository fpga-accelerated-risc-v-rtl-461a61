// tb_accel_csr: the accelerator register block driven directly over
// AXI4-Lite by this testbench, with random values on its status inputs.
// Every register is read and compared with its input (ID constant, STATUS,
// four counters, busy and MAC cycles, errors); SCRATCH is written with random
// byte strobes, with AW before W, W before AW and both together, and read
// back; writes to read-only registers must not change them and unmapped
// offsets read zero. Responses must be OKAY and come one cycle after the
// request has been accepted.
module tb_accel_csr;
  import soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t   req;
  axil_rsp_t   rsp;
  logic        busy;
  logic [31:0] count [4];
  logic [31:0] busy_cycles, mac_cycles, errors;

  accel_csr dut (.clk, .rst_n, .axil_req(req), .axil_rsp(rsp), .busy, .count, .busy_cycles,
                 .mac_cycles, .errors);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    int lat;
    @(negedge clk);
    req.ar_addr = a; req.ar_valid = 1; req.r_ready = 1;
    while (!rsp.ar_ready) @(negedge clk);
    @(negedge clk);
    req.ar_valid = 0;
    lat = 0;
    while (!rsp.r_valid) begin @(negedge clk); lat++; end
    check(lat == 0 && rsp.r_resp == 2'b00, "read answered OKAY one cycle after AR");
    d = rsp.r_data;
    @(negedge clk);
    req.r_ready = 0;
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d, input logic [3:0] s, input int order);
    @(negedge clk);
    req.aw_addr = a; req.w_data = d; req.w_strb = s; req.b_ready = 1;
    if (order != 2) req.aw_valid = 1;
    if (order != 1) req.w_valid = 1;
    if (order == 1) begin
      while (!rsp.aw_ready) @(negedge clk);
      @(negedge clk); req.aw_valid = 0; req.w_valid = 1;
    end
    if (order == 2) begin
      while (!rsp.w_ready) @(negedge clk);
      @(negedge clk); req.w_valid = 0; req.aw_valid = 1;
    end
    while (req.aw_valid || req.w_valid) begin
      bit aw_fire, w_fire;
      aw_fire = req.aw_valid && rsp.aw_ready;
      w_fire  = req.w_valid && rsp.w_ready;
      @(negedge clk);
      if (aw_fire) req.aw_valid = 0;
      if (w_fire)  req.w_valid  = 0;
    end
    while (!rsp.b_valid) @(negedge clk);
    check(rsp.b_resp == 2'b00, "write answered OKAY");
    @(negedge clk);
    req.b_ready = 0;
  endtask

  initial begin
    logic [31:0] d, scr;
    req = '0; busy = 0; busy_cycles = 0; mac_cycles = 0; errors = 0;
    for (int i = 0; i < 4; i++) count[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd(32'hA000_0024, scr);
    for (int n = 0; n < 40; n++) begin
      logic [31:0] v;
      logic [3:0]  s;
      busy = $urandom; busy_cycles = $urandom; mac_cycles = $urandom; errors = $urandom;
      for (int i = 0; i < 4; i++) count[i] = $urandom;
      rd(32'hA000_0000, d); check(d == 32'h4E4E_4131, "ID");
      rd(32'hA000_0004, d); check(d == {31'd0, busy}, "STATUS");
      for (int i = 0; i < 4; i++) begin rd(32'hA000_0008 + 4 * i, d); check(d == count[i], "count"); end
      rd(32'hA000_0018, d); check(d == busy_cycles, "BUSY_CYCLES");
      rd(32'hA000_001C, d); check(d == mac_cycles, "MAC_CYCLES");
      rd(32'hA000_0020, d); check(d == errors, "ERRORS");
      rd(32'hA000_0040 + 4 * ($urandom % 64), d); check(d == 0, "unmapped reads zero");
      v = $urandom; s = 4'($urandom);
      wr(32'hA000_0024, v, s, n % 3);
      for (int k = 0; k < 4; k++) if (s[k]) scr[8*k +: 8] = v[8*k +: 8];
      rd(32'hA000_0024, d); check(d == scr, "SCRATCH");
      wr(32'hA000_0000, $urandom, 4'hF, 0);
      rd(32'hA000_0000, d); check(d == 32'h4E4E_4131, "ID is read-only");
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

// tb_accel_dispatch: the accelerator overlay (dispatcher, four units, shared
// DMA) on a BRAM, driven the way the core drives it: a command is held on
// acc_valid until acc_ready, then the test waits for acc_done. Each of the
// four instructions is issued (VCONV 1x1, GEMM, RELU, CUSTOM batch norm and an
// unimplemented CUSTOM code) and spot results are compared with references
// computed here. Also checked: acc_ready is low while busy, acc_done and
// dcache_inval are single-cycle pulses, and the per-instruction, error and
// busy-cycle counters advance as expected.
module tb_accel_dispatch;
  import soc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        acc_valid, acc_ready, acc_done, inval, busy;
  acc_cmd_t    cmd;
  logic [31:0] count [4];
  logic [31:0] busy_cycles, mac_cycles, errors;
  axi_req_t    areq;
  axi_rsp_t    arsp;

  accel_dispatch dut (.clk, .rst_n, .acc_valid, .acc_cmd(cmd), .acc_ready, .acc_done,
                      .dcache_inval(inval), .busy, .count, .busy_cycles, .mac_cycles,
                      .errors, .axi_req(areq), .axi_rsp(arsp));
  axi_bram #(.BYTES(16384)) u_mem (.clk, .rst_n, .req(areq), .rsp(arsp));

  int checks = 0, failures = 0;
  int done_len = 0, done_pulses = 0, ready_while_busy = 0;
  always @(posedge clk) begin
    if (acc_done) done_pulses++;
    if (acc_done != inval) ready_while_busy += 1000;
    if (busy && acc_ready) ready_while_busy++;
  end

  function automatic logic signed [15:0] get(input int e);   // element at byte 2e
    logic [31:0] w;
    w = u_mem.mem[e / 2];
    return (e % 2) ? w[31:16] : w[15:0];
  endfunction
  task automatic put(input int e, input logic [15:0] v);
    if (e % 2) u_mem.mem[e / 2][31:16] = v;
    else       u_mem.mem[e / 2][15:0]  = v;
  endtask
  function automatic int clamp(input longint s);
    return (s > 32767) ? 32767 : (s < -32768) ? -32768 : int'(s);
  endfunction
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic exec(input acc_op_e op, input logic [6:0] f7, input int rd, input int rs1,
                      input int rs2, input int rs3);
    int n_before, c0;
    c0 = done_pulses;
    @(negedge clk);
    cmd = '{op: op, funct7: f7, rd_val: 32'(rd), rs1_val: 32'(rs1), rs2_val: 32'(rs2),
            rs3_val: 32'(rs3)};
    acc_valid = 1;
    while (!acc_ready) @(negedge clk);
    @(negedge clk);
    acc_valid = 0;
    while (done_pulses == c0) @(negedge clk);
    @(negedge clk);
    check(done_pulses == c0 + 1 && !busy, "single done pulse and idle afterwards");
  endtask

  initial begin
    int b0;
    acc_valid = 0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // RELU, 20 elements at byte 0x100 -> 0x400, ReLU6
    for (int e = 0; e < 20; e++) put(128 + e, 16'($signed($urandom % 4096) - 2048));
    b0 = int'(busy_cycles);
    exec(ACC_RELU, 7'd1, 'h400, 'h100, 20, 0);
    for (int e = 0; e < 20; e++) begin
      int x;
      x = get(128 + e);
      check(int'(get(512 + e)) == ((x < 0) ? 0 : (x > 1536) ? 1536 : x), "relu6 element");
    end
    check(int'(busy_cycles) > b0, "busy cycles counted");

    // GEMM 4x4x4: A at 0x800, B at 0xA00, C at 0xC00
    for (int e = 0; e < 16; e++) begin
      put(1024 + e, 16'($signed($urandom % 512) - 256));
      put(1280 + e, 16'($signed($urandom % 128) - 64));
    end
    exec(ACC_GEMM, 7'd0, 'hC00, 'h800, 'hA00, {2'b0, 10'd4, 10'd4, 10'd4});
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        automatic longint s = 0;
        for (int q = 0; q < 4; q++) s += longint'(get(1024 + i * 4 + q)) * longint'(get(1280 + q * 4 + j));
        check(int'(get(1536 + i * 4 + j)) == clamp(s >>> 4), "gemm element");
      end

    // VCONV 1x1: 2x2 image, 4 in / 4 out channels. input 0x800, kernel 0xA00, output 0xE00
    exec(ACC_VCONV, 7'd0, 'hE00, 'h800, 'hA00, {3'd0, 2'd1, 3'd1, 6'd4, 6'd4, 6'd2, 6'd2});
    for (int p = 0; p < 4; p++)
      for (int o = 0; o < 4; o++) begin
        automatic longint s = 0;
        for (int i = 0; i < 4; i++) s += longint'(get(1024 + p * 4 + i)) * longint'(get(1280 + i * 4 + o));
        check(int'(get(1792 + p * 4 + o)) == clamp(s >>> 4), "vconv element");
      end

    // CUSTOM batch norm: params at 0x1000, 9 elements 0x100 -> 0x1100
    u_mem.mem['h400] = 32'd9;
    u_mem.mem['h401] = {16'h0080, 16'h0200};   // beta 0.5, gamma 2.0
    exec(ACC_CUSTOM, 7'd0, 'h1100, 'h100, 'h1000, 0);
    for (int e = 0; e < 9; e++)
      check(int'(get(2176 + e)) == clamp(((longint'(get(128 + e)) * 512) >>> 8) + 128), "bn element");
    exec(ACC_CUSTOM, 7'd9, 'h1100, 'h100, 'h1000, 0);

    check(count[0] == 1 && count[1] == 1 && count[2] == 1 && count[3] == 2, "instruction counts");
    check(errors == 1, "error count");
    check(mac_cycles == 32'(4 + 15) + 32'(4 + 7), "mac cycles: gemm M+15, vconv R+7");
    check(ready_while_busy == 0, "acc_ready low while busy, inval with done");
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

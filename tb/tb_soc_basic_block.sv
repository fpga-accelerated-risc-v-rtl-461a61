// tb_soc_basic_block: a workload test of the whole system. The core runs a
// reduced ResNet-style basic block on an 8 x 8 x 8 feature map, followed by
// the LeakyReLU activation that YOLO-style detectors use, layer by layer:
//   1. conv:      FPGA.VCONV   T1 = 3x3 conv of X, padding 1, 8 -> 8 channels
//   2. normalise: FPGA.CUSTOM  batch norm (function 0) on T1, in place
//   3. activate:  FPGA.RELU    ReLU on T1, in place
//   4. conv:      FPGA.VCONV   T2 = 3x3 conv of T1, stride 1, padding 1
//   5. normalise: FPGA.CUSTOM  batch norm on T2, in place
//   6. shortcut:  scalar loop  Y = T2 + X (16-bit, wrapping), lh/add/sh
//   7. activate:  FPGA.RELU    LeakyReLU (slope 1/8) of Y into Z
// Each stage's output in memory is compared with a reference computed here,
// and the overlay's streaming-cycle counter is checked against the VCONV
// cycle formula.
module tb_soc_basic_block;
  import soc_pkg::*;
  import rv_asm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;   // 50 MHz

  logic        halted, accel_busy;
  logic [31:0] retired;

  fpga_riscv_soc dut (.clk, .rst_n, .halted, .retired, .accel_busy);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  int pc_n = 0;
  function automatic void emit(input logic [31:0] ins);
    dut.u_mem.mem[pc_n] = ins;
    pc_n++;
  endfunction
  function automatic void li(input int rd, input logic [31:0] v);
    logic [31:0] hi;
    hi = v + 32'h800;
    emit(lui(rd, int'(hi[31:12])));
    emit(addi(rd, rd, int'($signed(v[11:0]))));
  endfunction
  function automatic logic signed [15:0] el(input int byte_addr, input int e);
    logic [31:0] w;
    w = dut.u_mem.mem[byte_addr / 4 + e / 2];
    return (e % 2) ? w[31:16] : w[15:0];
  endfunction
  function automatic void put(input int byte_addr, input int e, input logic [15:0] v);
    if (e % 2) dut.u_mem.mem[byte_addr / 4 + e / 2][31:16] = v;
    else       dut.u_mem.mem[byte_addr / 4 + e / 2][15:0]  = v;
  endfunction
  function automatic logic signed [15:0] clamp(input longint s);
    return (s > 32767) ? 16'sh7FFF : (s < -32768) ? 16'sh8000 : 16'(s);
  endfunction

  localparam int X = 'h2000, K1 = 'h2400, T1 = 'h2C00, PRM = 'h3000, K2 = 'h3400,
                 T2 = 'h3C00, Y = 'h4000, Z = 'h4400;
  localparam int HW = 64, C = 8, NK = 9 * C * C;
  localparam logic [31:0] V_CFG = {3'd1, 2'd1, 3'd3, 6'(C), 6'(C), 6'd8, 6'd8};
  localparam logic signed [15:0] GAMMA = 16'sh00E0, BETA = 16'shFFC0;   // 0.875, -0.25

  logic signed [15:0] r1 [HW * C];
  logic signed [15:0] r2 [HW * C];
  logic signed [15:0] ry [HW * C];

  function automatic logic signed [15:0] bn(input logic signed [15:0] v);
    return clamp(((longint'(v) * longint'(GAMMA)) >>> 8) + longint'(BETA));
  endfunction

  // 3x3, padding 1, C -> C convolution of src (memory or reference array)
  function automatic logic signed [15:0] conv(input int src_mem, input bit from_r1, input int kern,
                                              input int oh, input int ow, input int o);
    longint s = 0;
    for (int kh = 0; kh < 3; kh++)
      for (int kw = 0; kw < 3; kw++)
        for (int i = 0; i < C; i++) begin
          int y, x;
          logic signed [15:0] v;
          y = oh + kh - 1;
          x = ow + kw - 1;
          if (y >= 0 && y < 8 && x >= 0 && x < 8) begin
            v = from_r1 ? r1[(y * 8 + x) * C + i] : el(src_mem, (y * 8 + x) * C + i);
            s += longint'(v) * longint'(el(kern, ((kh * 3 + kw) * C + i) * C + o));
          end
        end
    return clamp(s >>> 4);
  endfunction

  initial begin
    // ------------------------------------------------------------ data
    for (int w = 'h2000 / 4; w < 'h4800 / 4; w++) dut.u_mem.mem[w] = 32'h0;
    for (int e = 0; e < HW * C; e++) put(X, e, 16'($signed($urandom % 1024) - 512));
    for (int e = 0; e < NK; e++) put(K1, e, 16'($signed($urandom % 16) - 8));
    for (int e = 0; e < NK; e++) put(K2, e, 16'($signed($urandom % 16) - 8));
    dut.u_mem.mem[PRM / 4]     = 32'(HW * C);
    dut.u_mem.mem[PRM / 4 + 1] = {BETA, GAMMA};

    // ------------------------------------------------------------ program
    li(1, X); li(2, K1); li(3, T1); li(4, V_CFG); li(5, PRM);
    emit(addi(6, 0, HW * C));
    emit(fpga_vconv(3, 1, 2, 4));
    emit(fpga_custom(3, 3, 5, 0));
    emit(fpga_relu(3, 3, 6, 0));
    li(7, K2); li(8, T2);
    emit(fpga_vconv(8, 3, 7, 4));
    emit(fpga_custom(8, 8, 5, 0));
    li(9, Y);
    emit(addi(10, 0, HW * C));
    emit(lh(11, 1, 0));              // loop
    emit(lh(12, 8, 0));
    emit(add(13, 11, 12));
    emit(sh(13, 9, 0));
    emit(addi(1, 1, 2));
    emit(addi(8, 8, 2));
    emit(addi(9, 9, 2));
    emit(addi(10, 10, -1));
    emit(bne(10, 0, -32));
    li(9, Y); li(14, Z);
    emit(fpga_relu(14, 9, 6, 2));
    emit(ebreak());

    // ------------------------------------------------------------ run
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      while (!halted) @(posedge clk);
      begin repeat (200000) @(posedge clk); $display("FAIL: timeout"); failures++; end
    join_any
    disable fork;
    repeat (10) @(posedge clk);

    // ------------------------------------------------------------ reference
    for (int oh = 0; oh < 8; oh++)
      for (int ow = 0; ow < 8; ow++)
        for (int o = 0; o < C; o++) begin
          automatic logic signed [15:0] v;
          v = bn(conv(X, 1'b0, K1, oh, ow, o));
          r1[(oh * 8 + ow) * C + o] = (v < 0) ? 16'sd0 : v;
          check(el(T1, (oh * 8 + ow) * C + o) == r1[(oh * 8 + ow) * C + o], "conv + batch norm + ReLU");
        end
    for (int oh = 0; oh < 8; oh++)
      for (int ow = 0; ow < 8; ow++)
        for (int o = 0; o < C; o++) begin
          automatic int e = (oh * 8 + ow) * C + o;
          r2[e] = bn(conv(0, 1'b1, K2, oh, ow, o));
          check(el(T2, e) == r2[e], "conv + batch norm");
          ry[e] = 16'(r2[e] + el(X, e));
          check(el(Y, e) == ry[e], "shortcut add");
          check(el(Z, e) == ((ry[e] < 0) ? (ry[e] >>> 3) : ry[e]), "LeakyReLU");
        end
    begin
      automatic int n_neg = 0, n_pos = 0;
      for (int e = 0; e < HW * C; e++) if (ry[e] < 0) n_neg++; else if (ry[e] > 0) n_pos++;
      $display("block output: %0d negative, %0d positive", n_neg, n_pos);
      check(n_neg > HW && n_pos > HW, "block output has both signs");
    end

    // two convolutions of 16 x 2 tiles, each K*K*C_in + 7 streaming cycles
    check(dut.mac_cycles == 32'(2 * (HW / 4) * (C / 4) * (9 * C + 7)), "array streaming cycles");
    check(dut.acc_count[0] == 2 && dut.acc_count[1] == 0 && dut.acc_count[2] == 2 &&
          dut.acc_count[3] == 2, "instruction counters");
    check(dut.acc_errors == 0, "no accelerator errors");

    $display("cycles: busy=%0d mac=%0d retired=%0d", dut.busy_cycles, dut.mac_cycles, retired);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_soc_bottleneck: a workload test of the whole system. The core runs a
// reduced MobileNet-V2 stem and inverted-residual block on an 8 x 8 feature
// map, layer by layer, with the FPGA.* instructions and a scalar loop:
//   0. stem:      FPGA.VCONV   X = 3x3 conv, padding 1, 4 -> 8 channels
//   1. expand:    FPGA.GEMM    T1[64][16] = X[64][8] * W1[8][16]   (1x1 conv)
//   2. normalise: FPGA.CUSTOM  batch norm (function 0) on T1, in place
//   3. activate:  FPGA.RELU    ReLU6 on T1, in place
//   4. depthwise: FPGA.CUSTOM  3x3 depthwise conv (function 1), 16 channels
//   5. activate:  FPGA.RELU    ReLU6 on T2, in place
//   6. project:   FPGA.GEMM    T3[64][8] = T2[64][16] * W3[16][8]  (1x1 conv)
//   7. residual:  scalar loop  Y = T3 + X (16-bit, wrapping), lh/add/sh
// Each stage's output in memory is compared with a reference computed here,
// and the overlay's streaming-cycle counter is checked against the cycle
// formulas of the two systolic units.
module tb_soc_bottleneck;
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

  localparam int IN0 = 'h1800, K0 = 'h1C00, X = 'h2000, W1 = 'h2400, T1 = 'h2800, PRM = 'h3000,
                 DWP = 'h3100, T2 = 'h3800, W3 = 'h4000, T3 = 'h4800, Y = 'h5000;
  localparam int HW = 64, CS = 4, C0 = 8, C1 = 16, C2 = 8;
  localparam logic [31:0] V_CFG  = {3'd1, 2'd1, 3'd3, 6'(C0), 6'(CS), 6'd8, 6'd8};
  localparam logic [31:0] G1_CFG = {2'b00, 10'(C0), 10'(C1), 10'(HW)};
  localparam logic [31:0] DW_CFG = {3'd1, 2'd1, 3'd3, 6'd0, 6'(C1), 6'd8, 6'd8};
  localparam logic [31:0] G3_CFG = {2'b00, 10'(C1), 10'(C2), 10'(HW)};
  localparam logic signed [15:0] GAMMA = 16'sh00C0, BETA = 16'sh0040;   // 0.75, 0.25

  logic signed [15:0] x_ref [HW * C0];
  logic signed [15:0] r1 [HW * C1];
  logic signed [15:0] r2 [HW * C1];
  logic signed [15:0] r3 [HW * C2];

  function automatic logic signed [15:0] relu6(input logic signed [15:0] v);
    return (v < 0) ? 16'sd0 : (v > 16'sh0600) ? 16'sh0600 : v;
  endfunction

  initial begin
    // ------------------------------------------------------------ data
    for (int w = 'h1800 / 4; w < 'h6000 / 4; w++) dut.u_mem.mem[w] = 32'h0;
    for (int e = 0; e < HW * CS; e++) put(IN0, e, 16'($signed($urandom % 1024) - 512));
    for (int e = 0; e < 9 * CS * C0; e++) put(K0, e, 16'($signed($urandom % 16) - 8));
    for (int e = 0; e < C0 * C1; e++) put(W1, e, 16'($signed($urandom % 64) - 32));
    for (int e = 0; e < 9 * C1; e++) put(DWP + 4, e, 16'($signed($urandom % 32) - 16));
    for (int e = 0; e < C1 * C2; e++) put(W3, e, 16'($signed($urandom % 32) - 16));
    dut.u_mem.mem[PRM / 4]     = 32'(HW * C1);
    dut.u_mem.mem[PRM / 4 + 1] = {BETA, GAMMA};
    dut.u_mem.mem[DWP / 4]     = DW_CFG;

    // ------------------------------------------------------------ program
    li(1, IN0); li(2, K0); li(3, X); li(4, V_CFG);
    emit(fpga_vconv(3, 1, 2, 4));
    li(5, W1); li(6, T1); li(7, G1_CFG);
    emit(fpga_gemm(6, 3, 5, 7));
    li(8, PRM);
    emit(fpga_custom(6, 6, 8, 0));
    emit(addi(9, 0, HW * C1));
    emit(fpga_relu(6, 6, 9, 1));
    li(10, DWP); li(11, T2);
    emit(fpga_custom(11, 6, 10, 1));
    emit(fpga_relu(11, 11, 9, 1));
    li(12, W3); li(13, T3); li(14, G3_CFG);
    emit(fpga_gemm(13, 11, 12, 14));
    li(15, Y);
    emit(addi(16, 0, HW * C2));
    emit(lh(17, 3, 0));              // loop
    emit(lh(18, 13, 0));
    emit(add(19, 17, 18));
    emit(sh(19, 15, 0));
    emit(addi(3, 3, 2));
    emit(addi(13, 13, 2));
    emit(addi(15, 15, 2));
    emit(addi(16, 16, -1));
    emit(bne(16, 0, -32));
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
    // 0: stem convolution
    for (int oh = 0; oh < 8; oh++)
      for (int ow = 0; ow < 8; ow++)
        for (int o = 0; o < C0; o++) begin
          automatic longint s = 0;
          for (int kh = 0; kh < 3; kh++)
            for (int kw = 0; kw < 3; kw++)
              for (int i = 0; i < CS; i++) begin
                automatic int y = oh + kh - 1, x = ow + kw - 1;
                if (y >= 0 && y < 8 && x >= 0 && x < 8)
                  s += longint'(el(IN0, (y * 8 + x) * CS + i)) *
                       longint'(el(K0, ((kh * 3 + kw) * CS + i) * C0 + o));
              end
          x_ref[(oh * 8 + ow) * C0 + o] = clamp(s >>> 4);
          check(el(X, (oh * 8 + ow) * C0 + o) == x_ref[(oh * 8 + ow) * C0 + o], "stem convolution");
        end
    // 1-3: expand, batch norm, ReLU6
    for (int p = 0; p < HW; p++)
      for (int c = 0; c < C1; c++) begin
        automatic longint s = 0;
        automatic logic signed [15:0] g, b;
        for (int q = 0; q < C0; q++) s += longint'(x_ref[p * C0 + q]) * longint'(el(W1, q * C1 + c));
        g = clamp(s >>> 4);
        b = clamp(((longint'(g) * longint'(GAMMA)) >>> 8) + longint'(BETA));
        r1[p * C1 + c] = relu6(b);
        check(el(T1, p * C1 + c) == r1[p * C1 + c], "expand + batch norm + ReLU6");
      end
    // 4-5: depthwise 3x3, padding 1, ReLU6
    for (int oh = 0; oh < 8; oh++)
      for (int ow = 0; ow < 8; ow++)
        for (int c = 0; c < C1; c++) begin
          automatic longint s = 0;
          for (int kh = 0; kh < 3; kh++)
            for (int kw = 0; kw < 3; kw++) begin
              automatic int y = oh + kh - 1, x = ow + kw - 1;
              if (y >= 0 && y < 8 && x >= 0 && x < 8)
                s += longint'(r1[(y * 8 + x) * C1 + c]) * longint'(el(DWP + 4, (kh * 3 + kw) * C1 + c));
            end
          r2[(oh * 8 + ow) * C1 + c] = relu6(clamp(s >>> 4));
          check(el(T2, (oh * 8 + ow) * C1 + c) == r2[(oh * 8 + ow) * C1 + c], "depthwise + ReLU6");
        end
    // 6-7: project and residual add
    for (int p = 0; p < HW; p++)
      for (int c = 0; c < C2; c++) begin
        automatic longint s = 0;
        for (int q = 0; q < C1; q++) s += longint'(r2[p * C1 + q]) * longint'(el(W3, q * C2 + c));
        r3[p * C2 + c] = clamp(s >>> 4);
        check(el(T3, p * C2 + c) == r3[p * C2 + c], "projection");
        check(el(Y, p * C2 + c) == 16'(r3[p * C2 + c] + x_ref[p * C2 + c]), "residual add");
      end

    // the data must exercise the interesting ranges, not collapse to a constant
    begin
      automatic int n_zero = 0, n_sat = 0, n_mid = 0;
      for (int e = 0; e < HW * C1; e++)
        if (r1[e] == 0) n_zero++; else if (r1[e] == 16'sh0600) n_sat++; else n_mid++;
      $display("ReLU6 output: %0d zero, %0d at 6.0, %0d between", n_zero, n_sat, n_mid);
      check(n_zero > 0 && n_sat > 0 && n_mid > 0, "ReLU6 input covers all three regions");
      n_mid = 0;
      for (int e = 0; e < HW * C1; e++) if (r2[e] != 0 && r2[e] != 16'sh0600) n_mid++;
      $display("depthwise output: %0d of %0d strictly between 0 and 6.0", n_mid, HW * C1);
      check(n_mid > HW, "depthwise output is not degenerate");
    end

    // streaming cycles: GEMM ceil(N/8)*ceil(K/8)*(M+15), VCONV tiles*(K*K*Cin+7)
    check(dut.mac_cycles == 32'((HW / 4) * (C0 / 4) * (9 * CS + 7) + 2 * 1 * (HW + 15) + 1 * 2 * (HW + 15)),
          "array streaming cycles");
    check(dut.acc_count[0] == 1 && dut.acc_count[1] == 2 && dut.acc_count[2] == 2 &&
          dut.acc_count[3] == 2, "instruction counters");
    check(dut.acc_errors == 0, "no accelerator errors");

    $display("cycles: busy=%0d mac=%0d retired=%0d", dut.busy_cycles, dut.mac_cycles, retired);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_fpga_riscv_soc: end-to-end test of the whole system at its default
// (paper) sizes. A program is placed in main memory through the memory
// array, the core is released from reset and runs until EBREAK. The program
//   1. sums a 16-word array in a loop (I-cache and D-cache misses, load-use
//      bubbles, taken branches), multiplies, and stores the results;
//   2. reads the GEMM output area into the D-cache, runs FPGA.GEMM (8x8x8)
//      and reads it again, which must return the new value (the accelerator's
//      completion invalidates the D-cache);
//   3. runs FPGA.RELU over the GEMM result, FPGA.VCONV (4x4x4 input, 3x3
//      kernel, padding 1, 4 output channels) and FPGA.CUSTOM batch norm over
//      the RELU result;
//   4. reads the accelerator register block over AXI4-Lite (ID, counters,
//      MAC cycles, errors, status) and writes and reads back its scratch
//      register, storing everything to a result area.
// Afterwards every accelerator output and every stored result is compared
// with values computed here. The test counts each mechanism the design has
// (I-cache refill, D-cache refill, write-through store, D-cache invalidate,
// load-use bubble, branch flush, data-memory stall, accelerator stall, DMA
// read and write bursts, AXI4-Lite transfers, arbitration waits) and counts a
// failure for any that never happened.
module tb_fpga_riscv_soc;
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
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- mechanisms
  int n_irefill = 0, n_drefill = 0, n_dwrite = 0, n_inval = 0, n_loaduse = 0, n_flush = 0;
  int n_memstall = 0, n_accstall = 0, n_dma_rd = 0, n_dma_wr = 0, n_lite = 0, n_argwait = 0;
  int cycles = 0;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dut.m_req[0].ar_valid && dut.m_rsp[0].ar_ready) n_irefill++;
    if (dut.m_req[1].ar_valid && dut.m_rsp[1].ar_ready) n_drefill++;
    if (dut.m_req[1].aw_valid && dut.m_rsp[1].aw_ready) n_dwrite++;
    if (dut.m_req[2].ar_valid && dut.m_rsp[2].ar_ready) n_dma_rd++;
    if (dut.m_req[2].aw_valid && dut.m_rsp[2].aw_ready) n_dma_wr++;
    for (int m = 0; m < 3; m++)
      if ((dut.m_req[m].ar_valid && !dut.m_rsp[m].ar_ready) ||
          (dut.m_req[m].aw_valid && !dut.m_rsp[m].aw_ready)) n_argwait++;
    if (dut.lite_req.ar_valid && dut.lite_rsp.ar_ready) n_lite++;
    if (dut.lite_req.aw_valid && dut.lite_rsp.aw_ready) n_lite++;
    if (dut.dcache_inval) n_inval++;
    if (dut.u_core.load_use) n_loaduse++;
    if (dut.u_core.redirect) n_flush++;
    if (dut.u_core.mem_stall) n_memstall++;
    if (dut.u_core.acc_stall) n_accstall++;
  end

  // ---------------------------------------------------------------- memory helpers
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
  function automatic int clamp(input longint s);
    return (s > 32767) ? 32767 : (s < -32768) ? -32768 : int'(s);
  endfunction

  localparam int XA = 'h3000, A = 'h4000, B = 'h4100, C = 'h4200, D = 'h4300, E = 'h4400,
                 PRM = 'h4500, VI = 'h5000, VK = 'h5100, VO = 'h5400, RES = 'h6000;
  localparam logic [31:0] GEMM_CFG  = {2'b00, 10'd8, 10'd8, 10'd8};
  localparam logic [31:0] VCONV_CFG = {3'd1, 2'd1, 3'd3, 6'd4, 6'd4, 6'd4, 6'd4};

  logic signed [15:0] c_ref [64];
  logic signed [15:0] d_ref [64];

  initial begin
    int sum;
    // ------------------------------------------------------------ data
    sum = 0;
    for (int i = 0; i < 16; i++) begin
      dut.u_mem.mem[XA / 4 + i] = 32'($urandom % 1000);
      sum += int'(dut.u_mem.mem[XA / 4 + i]);
    end
    for (int e = 0; e < 64; e++) begin
      put(A, e, 16'($signed($urandom % 1024) - 512));
      put(B, e, 16'($signed($urandom % 128) - 64));
      put(C, e, 16'h7777);
    end
    for (int e = 0; e < 64; e++) put(VI, e, 16'($signed($urandom % 1024) - 512));
    for (int e = 0; e < 144; e++) put(VK, e, 16'($signed($urandom % 64) - 32));
    dut.u_mem.mem[PRM / 4]     = 32'd64;
    dut.u_mem.mem[PRM / 4 + 1] = {16'hFF80, 16'h0180};   // beta -0.5, gamma 1.5

    // ------------------------------------------------------------ program
    li(10, XA);
    emit(addi(11, 0, 16));
    emit(addi(12, 0, 0));
    emit(lw(13, 10, 0));             // loop
    emit(add(12, 12, 13));           // load-use
    emit(addi(10, 10, 4));
    emit(addi(11, 11, -1));
    emit(bne(11, 0, -16));
    li(20, RES);
    emit(sw(12, 20, 0));
    emit(mop(0, 14, 12, 12));
    emit(sw(14, 20, 4));
    li(21, A); li(22, B); li(23, C);
    emit(lw(15, 23, 0));             // old C[0..1] now cached
    emit(sw(15, 20, 8));
    li(25, GEMM_CFG);
    emit(fpga_gemm(23, 21, 22, 25));
    emit(lw(15, 23, 0));             // must be the new value
    emit(sw(15, 20, 12));
    li(26, D);
    emit(addi(27, 0, 64));
    emit(fpga_relu(26, 23, 27, 0));
    li(5, VI); li(6, VK); li(7, VO); li(8, VCONV_CFG);
    emit(fpga_vconv(7, 5, 6, 8));
    li(9, E); li(28, PRM);
    emit(fpga_custom(9, 26, 28, 0));
    li(29, ACCEL_BASE);
    for (int r = 0; r < 9; r++) begin
      emit(lw(1, 29, 4 * r));
      emit(sw(1, 20, 16 + 4 * r));
    end
    emit(addi(2, 0, 'h5A5));
    emit(sw(2, 29, 'h24));
    emit(lw(3, 29, 'h24));
    emit(sw(3, 20, 52));
    emit(ebreak());

    // ------------------------------------------------------------ run
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!halted) @(posedge clk);
    repeat (10) @(posedge clk);

    // ------------------------------------------------------------ results
    check(dut.u_mem.mem[RES / 4] == 32'(sum), "loop sum");
    check(dut.u_mem.mem[RES / 4 + 1] == 32'(sum * sum), "mul");
    check(dut.u_mem.mem[RES / 4 + 2] == 32'h7777_7777, "pre-GEMM read");
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        automatic longint s = 0;
        for (int q = 0; q < 8; q++) s += longint'(el(A, i * 8 + q)) * longint'(el(B, q * 8 + j));
        c_ref[i * 8 + j] = 16'(clamp(s >>> 4));
        check(el(C, i * 8 + j) == c_ref[i * 8 + j], "GEMM element");
      end
    check(dut.u_mem.mem[RES / 4 + 3] == {c_ref[1], c_ref[0]}, "read after GEMM sees new data");
    for (int e = 0; e < 64; e++) begin
      d_ref[e] = (c_ref[e] < 0) ? 16'sd0 : c_ref[e];
      check(el(D, e) == d_ref[e], "RELU element");
      check(int'(el(E, e)) == clamp(((longint'(d_ref[e]) * 384) >>> 8) - 128), "batch-norm element");
    end
    for (int oh = 0; oh < 4; oh++)
      for (int ow = 0; ow < 4; ow++)
        for (int o = 0; o < 4; o++) begin
          automatic longint s = 0;
          for (int kh = 0; kh < 3; kh++)
            for (int kw = 0; kw < 3; kw++)
              for (int i = 0; i < 4; i++) begin
                automatic int y = oh + kh - 1, x = ow + kw - 1;
                if (y >= 0 && y < 4 && x >= 0 && x < 4)
                  s += longint'(el(VI, (y * 4 + x) * 4 + i)) * longint'(el(VK, ((kh * 3 + kw) * 4 + i) * 4 + o));
              end
          check(int'(el(VO, (oh * 4 + ow) * 4 + o)) == clamp(s >>> 4), "VCONV element");
        end
    check(dut.u_mem.mem[RES / 4 + 4] == 32'h4E4E_4131, "ID register");
    check(dut.u_mem.mem[RES / 4 + 5] == 32'd0, "status idle");
    check(dut.u_mem.mem[RES / 4 + 6] == 1 && dut.u_mem.mem[RES / 4 + 7] == 1 &&
          dut.u_mem.mem[RES / 4 + 8] == 1 && dut.u_mem.mem[RES / 4 + 9] == 1, "instruction counters");
    check(dut.u_mem.mem[RES / 4 + 10] > 32'd195, "busy cycles");
    check(dut.u_mem.mem[RES / 4 + 11] == 32'd23 + 32'd172, "MAC cycles: GEMM 8+15, VCONV 4 tiles x (36+7)");
    check(dut.u_mem.mem[RES / 4 + 12] == 32'd0, "no accelerator errors");
    check(dut.u_mem.mem[RES / 4 + 13] == 32'h5A5, "scratch register");

    $display("cycles=%0d retired=%0d irefill=%0d drefill=%0d dwrite=%0d inval=%0d loaduse=%0d flush=%0d",
             cycles, retired, n_irefill, n_drefill, n_dwrite, n_inval, n_loaduse, n_flush);
    $display("memstall=%0d accstall=%0d dma_rd=%0d dma_wr=%0d lite=%0d arbwait=%0d",
             n_memstall, n_accstall, n_dma_rd, n_dma_wr, n_lite, n_argwait);
    check(n_irefill > 0, "I-cache refill happened");
    check(n_drefill > 0, "D-cache refill happened");
    check(n_dwrite > 0, "write-through store happened");
    check(n_inval == 4, "D-cache invalidated after each accelerator instruction");
    check(n_loaduse > 0, "load-use bubble happened");
    check(n_flush > 0, "branch flush happened");
    check(n_memstall > 0, "data-memory stall happened");
    check(n_accstall > 0, "accelerator stall happened");
    check(n_dma_rd > 0, "DMA read bursts happened");
    check(n_dma_wr > 0, "DMA write bursts happened");
    check(n_lite == 11, "AXI4-Lite transfers: 10 reads, 1 write");
    check(n_argwait > 0, "arbitration waits happened");
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

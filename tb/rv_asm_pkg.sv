// rv_asm_pkg: a tiny RV32IM assembler in SystemVerilog functions, used by the
// testbenches to build test programs. Each function returns one 32-bit
// instruction word. fpga_* functions encode the custom-0 FPGA.* instructions:
// R4 layout for VCONV/GEMM (rs3 in bits 31:27), funct7 in bits 31:25 for RELU
// and CUSTOM.
package rv_asm_pkg;

  function automatic logic [31:0] r_type(input logic [6:0] f7, input int rs2, input int rs1,
                                         input logic [2:0] f3, input int rd, input logic [6:0] opc);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] i_type(input int imm, input int rs1, input logic [2:0] f3,
                                         input int rd, input logic [6:0] opc);
    return {12'(imm), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] s_type(input int imm, input int rs2, input int rs1,
                                         input logic [2:0] f3);
    logic [11:0] i;
    i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_type(input int off, input int rs2, input int rs1,
                                         input logic [2:0] f3);
    logic [12:0] o;
    o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), f3, o[4:1], o[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] lui(input int rd, input int imm20);
    return {20'(imm20), 5'(rd), 7'b0110111};
  endfunction
  function automatic logic [31:0] auipc(input int rd, input int imm20);
    return {20'(imm20), 5'(rd), 7'b0010111};
  endfunction
  function automatic logic [31:0] jal(input int rd, input int off);
    logic [20:0] o;
    o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] jalr(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b000, rd, 7'b1100111);
  endfunction

  function automatic logic [31:0] addi(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b000, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] slli(input int rd, input int rs1, input int sh);
    return i_type(sh, rs1, 3'b001, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] srai(input int rd, input int rs1, input int sh);
    return i_type(sh | 32'h400, rs1, 3'b101, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] add(input int rd, input int rs1, input int rs2);
    return r_type(7'h00, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] sub(input int rd, input int rs1, input int rs2);
    return r_type(7'h20, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] xor_(input int rd, input int rs1, input int rs2);
    return r_type(7'h00, rs2, rs1, 3'b100, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] slt(input int rd, input int rs1, input int rs2);
    return r_type(7'h00, rs2, rs1, 3'b010, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] sltu(input int rd, input int rs1, input int rs2);
    return r_type(7'h00, rs2, rs1, 3'b011, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] sra(input int rd, input int rs1, input int rs2);
    return r_type(7'h20, rs2, rs1, 3'b101, rd, 7'b0110011);
  endfunction
  // M extension, f3: 0 mul 1 mulh 2 mulhsu 3 mulhu 4 div 5 divu 6 rem 7 remu
  function automatic logic [31:0] mop(input logic [2:0] f3, input int rd, input int rs1, input int rs2);
    return r_type(7'h01, rs2, rs1, f3, rd, 7'b0110011);
  endfunction

  function automatic logic [31:0] lw(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b010, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] lh(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b001, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] lbu(input int rd, input int rs1, input int imm);
    return i_type(imm, rs1, 3'b100, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] sw(input int rs2, input int rs1, input int imm);
    return s_type(imm, rs2, rs1, 3'b010);
  endfunction
  function automatic logic [31:0] sh(input int rs2, input int rs1, input int imm);
    return s_type(imm, rs2, rs1, 3'b001);
  endfunction
  function automatic logic [31:0] sb(input int rs2, input int rs1, input int imm);
    return s_type(imm, rs2, rs1, 3'b000);
  endfunction
  function automatic logic [31:0] beq(input int rs1, input int rs2, input int off);
    return b_type(off, rs2, rs1, 3'b000);
  endfunction
  function automatic logic [31:0] bne(input int rs1, input int rs2, input int off);
    return b_type(off, rs2, rs1, 3'b001);
  endfunction
  function automatic logic [31:0] blt(input int rs1, input int rs2, input int off);
    return b_type(off, rs2, rs1, 3'b100);
  endfunction
  function automatic logic [31:0] ebreak();
    return 32'h0010_0073;
  endfunction

  // FPGA.* custom-0 instructions
  function automatic logic [31:0] fpga_vconv(input int rd, input int rs1, input int rs2, input int rs3);
    return {5'(rs3), 2'b00, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b0001011};
  endfunction
  function automatic logic [31:0] fpga_gemm(input int rd, input int rs1, input int rs2, input int rs3);
    return {5'(rs3), 2'b00, 5'(rs2), 5'(rs1), 3'b001, 5'(rd), 7'b0001011};
  endfunction
  function automatic logic [31:0] fpga_relu(input int rd, input int rs1, input int rs2, input int f7);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'b010, 5'(rd), 7'b0001011};
  endfunction
  function automatic logic [31:0] fpga_custom(input int rd, input int rs1, input int rs2, input int f7);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'b111, 5'(rd), 7'b0001011};
  endfunction

endpackage

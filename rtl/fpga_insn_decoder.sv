// fpga_insn_decoder: recognises the FPGA.* custom instructions in the
// RISC-V custom-0 opcode space (opcode 0001011) and decodes them.
//
// Encoding, from the paper's instruction-format table: opcode in bits 6:0,
// rd in 11:7, funct3 in 14:12 (000 VCONV, 001 GEMM, 010 RELU, 111 CUSTOM),
// register fields in 19:15 and 24:20, funct7 in 31:25. The paper's table and
// its own GCC intrinsic disagree on the register fields: the table shows two
// source fields (labelled rs2 at 19:15 and rs3 at 24:20) while the syntax
// "fpga.vconv rd, rs1, rs2, rs3" and the intrinsic ".insn r 0x0B, 0, 0, rd,
// rs1, rs2, rs3" use the standard R4 layout (rs1 19:15, rs2 24:20, rs3
// 31:27). This decoder follows the intrinsic, i.e. the code the authors'
// software emits, for the register operands, and reads funct7 from bits 31:25
// as the table prints it. VCONV and GEMM therefore take rs3 from bits 31:27;
// RELU and CUSTOM use bits 31:25 as a 7-bit function code (activation type,
// or which custom operation) and have no rs3. rd names the output address
// register: it is read like a source and never written.
//
// Purely combinational.
module fpga_insn_decoder
  import soc_pkg::*;
(
  input  logic [31:0] instr,
  output logic        is_fpga,    // a recognised FPGA.* instruction
  output acc_op_e     op,
  output logic [6:0]  funct7,
  output logic        uses_rs3,   // bits 31:27 name a third source register
  output logic [4:0]  rs1,
  output logic [4:0]  rs2,
  output logic [4:0]  rs3,
  output logic [4:0]  rd          // read as the output-address operand
);
  logic [2:0] f3;
  assign f3     = instr[14:12];
  assign funct7 = instr[31:25];
  assign rs1    = instr[19:15];
  assign rs2    = instr[24:20];
  assign rd     = instr[11:7];

  always_comb begin
    is_fpga  = 1'b0;
    op       = ACC_VCONV;
    uses_rs3 = 1'b0;
    if (instr[6:0] == OPC_CUSTOM0) begin
      unique case (f3)
        3'b000: begin is_fpga = 1'b1; op = ACC_VCONV;  uses_rs3 = 1'b1; end
        3'b001: begin is_fpga = 1'b1; op = ACC_GEMM;   uses_rs3 = 1'b1; end
        3'b010: begin is_fpga = 1'b1; op = ACC_RELU;   end
        3'b111: begin is_fpga = 1'b1; op = ACC_CUSTOM; end
        default: ;
      endcase
    end
    rs3 = uses_rs3 ? instr[31:27] : 5'd0;
  end

endmodule

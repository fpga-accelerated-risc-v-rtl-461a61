// tb_fpga_insn_decoder: checks the custom-0 decoder against encodings built
// field by field: every funct3 code, random register fields and funct7, and
// non-custom opcodes that must not be recognised.
module tb_fpga_insn_decoder;
  import soc_pkg::*;

  logic [31:0] instr;
  logic        is_fpga, uses_rs3;
  acc_op_e     op;
  logic [6:0]  funct7;
  logic [4:0]  rs1, rs2, rs3, rd;
  int checks = 0, failures = 0;

  fpga_insn_decoder dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s instr=%h", what, instr); end
  endtask

  initial begin
    for (int n = 0; n < 400; n++) begin
      logic [2:0] f3;
      logic [6:0] f7;
      logic [4:0] a, b, d;
      logic [6:0] opc;
      f3  = 3'($urandom);
      f7  = 7'($urandom);
      a   = 5'($urandom);
      b   = 5'($urandom);
      d   = 5'($urandom);
      opc = (n % 4 == 3) ? 7'($urandom) : 7'b0001011;
      instr = {f7, b, a, f3, d, opc};
      #1;
      if (opc == 7'b0001011 && f3 inside {3'b000, 3'b001, 3'b010, 3'b111}) begin
        check(is_fpga, "recognised");
        check(op == acc_op_e'(f3), "op from funct3");
        check(funct7 == f7, "funct7 = bits 31:25");
        check(rs1 == a && rs2 == b && rd == d, "register fields");
        check(uses_rs3 == (f3 inside {3'b000, 3'b001}), "rs3 only for VCONV/GEMM");
        check(rs3 == (uses_rs3 ? f7[6:2] : 5'd0), "rs3 = bits 31:27");
      end else begin
        check(!is_fpga, "not recognised");
      end
    end
    // the paper's intrinsic: .insn r 0x0B, 0, 0, x10, x11, x12, x13
    instr = {5'd13, 2'b00, 5'd12, 5'd11, 3'b000, 5'd10, 7'h0B};
    #1;
    check(is_fpga && op == ACC_VCONV && rd == 10 && rs1 == 11 && rs2 == 12 && rs3 == 13,
          "intrinsic encoding");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// rv_core: RV32IM processor with a 5-stage in-order pipeline (Fetch, Decode,
// Execute, Memory, Writeback) that also issues the FPGA.* custom
// instructions to the accelerator overlay. The ISA (RV32I + M), the five
// stages and the custom-0 decoding come from the paper; the hazard handling,
// forwarding, stall rules and the blocking accelerator handshake are this
// design's own.
//
// Hazards: results are forwarded to Execute from the Memory and Writeback
// stages, and the register file writes through to Decode. A load followed
// by a dependent instruction costs one bubble. Branches and jumps resolve in
// Execute; a taken one flushes the two younger instructions (two-cycle
// penalty, no prediction). MUL/DIV finish in Execute in one cycle.
//
// FPGA.* instructions: Decode reads up to four registers (rd is read as the
// output address, rs1, rs2 and rs3). In Execute the core raises acc_valid
// with the operands; once the overlay accepts (acc_ready) the instruction
// waits in Execute, holding everything older than it, until acc_done. The
// instruction writes no register. This blocking behaviour matches the paper,
// which lists non-blocking extensions as future work.
//
// Memory ports: imem (req/addr -> rdata/ready, ready in the cycle the word is
// returned) and dmem (req/we/be/addr/wdata -> rdata/ready). Both are held
// until ready. FENCE, ECALL and CSR instructions execute as no-ops (no CSRs
// are implemented); EBREAK reaching Writeback sets the sticky `halted`
// output, which test programs use to signal their end. The reset PC is a
// parameter.
module rv_core
  import soc_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction memory
  output logic        imem_req,
  output logic [31:0] imem_addr,
  input  logic [31:0] imem_rdata,
  input  logic        imem_ready,
  // data memory
  output logic        dmem_req,
  output logic        dmem_we,
  output logic [3:0]  dmem_be,
  output logic [31:0] dmem_addr,
  output logic [31:0] dmem_wdata,
  input  logic [31:0] dmem_rdata,
  input  logic        dmem_ready,
  // accelerator overlay
  output logic        acc_valid,
  output acc_cmd_t    acc_cmd,
  input  logic        acc_ready,
  input  logic        acc_done,
  // status
  output logic        halted,
  output logic [31:0] retired
);

  // ------------------------------------------------------------ types
  typedef enum logic [1:0] {SA_RS1, SA_PC, SA_ZERO} srca_e;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] instr;
  } ifid_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [4:0]  rd, rs1, rs2, rs3;
    logic [31:0] v_rd, v1, v2, v3;   // operand values (v_rd: rd read as source)
    logic [31:0] imm;
    logic [2:0]  funct3;
    logic        alt;                // SUB / SRA
    logic        is_m;               // M extension op
    srca_e       srca;
    logic        srcb_imm;
    logic        alu;                // ALU/LUI/AUIPC result
    logic        is_load, is_store, is_branch, is_jal, is_jalr;
    logic        reg_write;
    logic        is_acc;
    acc_op_e     acc_op;
    logic [6:0]  funct7;
    logic        is_ebreak;
    logic        uses_rs1, uses_rs2, uses_rs3, uses_rd;
  } idex_t;

  typedef struct packed {
    logic        valid;
    logic [4:0]  rd;
    logic [31:0] result;
    logic [31:0] store_data;
    logic [2:0]  funct3;
    logic        is_load, is_store;
    logic        reg_write;
    logic        is_ebreak;
  } exmem_t;

  typedef struct packed {
    logic        valid;
    logic [4:0]  rd;
    logic [31:0] result;
    logic        reg_write;
    logic        is_ebreak;
  } memwb_t;

  ifid_t  ifid;
  idex_t  idex, idex_n;
  exmem_t exmem;
  memwb_t memwb;

  logic [31:0] pc_f;

  // ------------------------------------------------------------ register file
  logic [31:0] rf [32];
  logic [31:0] wb_data;
  logic        wb_we;
  assign wb_we   = memwb.valid && memwb.reg_write && (memwb.rd != 5'd0);
  assign wb_data = memwb.result;

  function automatic logic [31:0] rf_read(input logic [4:0] a);
    if (a == 5'd0) return 32'd0;
    if (wb_we && memwb.rd == a) return wb_data;
    return rf[a];
  endfunction

  always_ff @(posedge clk) begin
    if (wb_we) rf[memwb.rd] <= wb_data;
  end

  // ------------------------------------------------------------ decode
  logic [31:0] ins;
  assign ins = ifid.instr;
  logic [6:0] opc;
  assign opc = ins[6:0];

  logic        d_is_fpga, d_uses_rs3;
  acc_op_e     d_acc_op;
  logic [6:0]  d_f7;
  logic [4:0]  d_rs1, d_rs2, d_rs3, d_rdsrc;

  fpga_insn_decoder u_cdec (
    .instr(ins), .is_fpga(d_is_fpga), .op(d_acc_op), .funct7(d_f7),
    .uses_rs3(d_uses_rs3), .rs1(d_rs1), .rs2(d_rs2), .rs3(d_rs3), .rd(d_rdsrc)
  );

  always_comb begin
    logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
    imm_i = {{20{ins[31]}}, ins[31:20]};
    imm_s = {{20{ins[31]}}, ins[31:25], ins[11:7]};
    imm_b = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
    imm_u = {ins[31:12], 12'd0};
    imm_j = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};

    idex_n          = '0;
    idex_n.valid    = ifid.valid;
    idex_n.pc       = ifid.pc;
    idex_n.rd       = ins[11:7];
    idex_n.rs1      = d_is_fpga ? d_rs1 : ins[19:15];
    idex_n.rs2      = d_is_fpga ? d_rs2 : ins[24:20];
    idex_n.rs3      = d_rs3;
    idex_n.funct3   = ins[14:12];
    idex_n.funct7   = d_f7;
    idex_n.srca     = SA_RS1;
    idex_n.acc_op   = d_acc_op;
    unique case (opc)
      OPC_LUI:    begin idex_n.alu = 1'b1; idex_n.srca = SA_ZERO; idex_n.srcb_imm = 1'b1;
                        idex_n.imm = imm_u; idex_n.reg_write = 1'b1; idex_n.funct3 = 3'b000; end
      OPC_AUIPC:  begin idex_n.alu = 1'b1; idex_n.srca = SA_PC; idex_n.srcb_imm = 1'b1;
                        idex_n.imm = imm_u; idex_n.reg_write = 1'b1; idex_n.funct3 = 3'b000; end
      OPC_JAL:    begin idex_n.is_jal = 1'b1; idex_n.imm = imm_j; idex_n.reg_write = 1'b1; end
      OPC_JALR:   begin idex_n.is_jalr = 1'b1; idex_n.imm = imm_i; idex_n.reg_write = 1'b1;
                        idex_n.uses_rs1 = 1'b1; end
      OPC_BRANCH: begin idex_n.is_branch = 1'b1; idex_n.imm = imm_b;
                        idex_n.uses_rs1 = 1'b1; idex_n.uses_rs2 = 1'b1; end
      OPC_LOAD:   begin idex_n.is_load = 1'b1; idex_n.imm = imm_i; idex_n.reg_write = 1'b1;
                        idex_n.uses_rs1 = 1'b1; end
      OPC_STORE:  begin idex_n.is_store = 1'b1; idex_n.imm = imm_s;
                        idex_n.uses_rs1 = 1'b1; idex_n.uses_rs2 = 1'b1; end
      OPC_OPIMM:  begin idex_n.alu = 1'b1; idex_n.srcb_imm = 1'b1; idex_n.imm = imm_i;
                        idex_n.reg_write = 1'b1; idex_n.uses_rs1 = 1'b1;
                        idex_n.alt = (ins[14:12] == 3'b101) && ins[30]; end
      OPC_OP:     begin idex_n.alu = 1'b1; idex_n.reg_write = 1'b1;
                        idex_n.uses_rs1 = 1'b1; idex_n.uses_rs2 = 1'b1;
                        idex_n.alt = ins[30]; idex_n.is_m = (ins[31:25] == 7'b0000001); end
      OPC_SYSTEM: begin idex_n.is_ebreak = (ins[31:7] == 25'h0002000); end
      OPC_CUSTOM0: if (d_is_fpga) begin
                        idex_n.is_acc = 1'b1;
                        idex_n.uses_rs1 = 1'b1; idex_n.uses_rs2 = 1'b1;
                        idex_n.uses_rs3 = d_uses_rs3; idex_n.uses_rd = 1'b1;
                      end
      default: ;  // FENCE and unknown opcodes: no-op
    endcase
    if (!ifid.valid) idex_n = '0;
    idex_n.v1   = rf_read(idex_n.rs1);
    idex_n.v2   = rf_read(idex_n.rs2);
    idex_n.v3   = rf_read(idex_n.rs3);
    idex_n.v_rd = rf_read(d_rdsrc);
  end

  // ------------------------------------------------------------ execute
  // forwarding: EX/MEM (non-load results) first, then MEM/WB
  function automatic logic [31:0] fwd(input logic [4:0] a, input logic [31:0] v);
    if (a == 5'd0) return 32'd0;
    if (exmem.valid && exmem.reg_write && !exmem.is_load && exmem.rd == a) return exmem.result;
    if (memwb.valid && memwb.reg_write && memwb.rd == a) return memwb.result;
    return v;
  endfunction

  logic [31:0] x1, x2, x3, xrd;
  assign x1  = fwd(idex.rs1, idex.v1);
  assign x2  = fwd(idex.rs2, idex.v2);
  assign x3  = fwd(idex.rs3, idex.v3);
  assign xrd = fwd(idex.rd,  idex.v_rd);

  logic [31:0] opa, opb, alu_res, ex_result;
  logic        br_taken;
  logic [31:0] br_target;

  always_comb begin
    logic [63:0] prod;
    unique case (idex.srca)
      SA_PC:   opa = idex.pc;
      SA_ZERO: opa = 32'd0;
      default: opa = x1;
    endcase
    opb = idex.srcb_imm ? idex.imm : x2;
    alu_res = 32'd0;
    prod    = 64'd0;
    if (idex.is_m) begin
      unique case (idex.funct3)
        // low 64 bits of a product of operands extended to 64 bits
        3'b000: begin prod = {32'd0, opa} * {32'd0, opb}; alu_res = prod[31:0]; end
        3'b001: begin prod = {{32{opa[31]}}, opa} * {{32{opb[31]}}, opb}; alu_res = prod[63:32]; end
        3'b010: begin prod = {{32{opa[31]}}, opa} * {32'd0, opb}; alu_res = prod[63:32]; end
        3'b011: begin prod = {32'd0, opa} * {32'd0, opb}; alu_res = prod[63:32]; end
        3'b100: alu_res = (opb == 0) ? 32'hFFFF_FFFF :
                          (opa == 32'h8000_0000 && opb == 32'hFFFF_FFFF) ? 32'h8000_0000 :
                          32'($signed(opa) / $signed(opb));
        3'b101: alu_res = (opb == 0) ? 32'hFFFF_FFFF : opa / opb;
        3'b110: alu_res = (opb == 0) ? opa :
                          (opa == 32'h8000_0000 && opb == 32'hFFFF_FFFF) ? 32'd0 :
                          32'($signed(opa) % $signed(opb));
        default: alu_res = (opb == 0) ? opa : opa % opb;
      endcase
    end else begin
      unique case (idex.funct3)
        3'b000: alu_res = (idex.alt && !idex.srcb_imm) ? opa - opb : opa + opb;
        3'b001: alu_res = opa << opb[4:0];
        3'b010: alu_res = {31'd0, $signed(opa) < $signed(opb)};
        3'b011: alu_res = {31'd0, opa < opb};
        3'b100: alu_res = opa ^ opb;
        3'b101: alu_res = idex.alt ? 32'($signed(opa) >>> opb[4:0]) : opa >> opb[4:0];
        3'b110: alu_res = opa | opb;
        default: alu_res = opa & opb;
      endcase
    end

    unique case (idex.funct3)
      3'b000:  br_taken = (x1 == x2);
      3'b001:  br_taken = (x1 != x2);
      3'b100:  br_taken = ($signed(x1) < $signed(x2));
      3'b101:  br_taken = ($signed(x1) >= $signed(x2));
      3'b110:  br_taken = (x1 < x2);
      3'b111:  br_taken = (x1 >= x2);
      default: br_taken = 1'b0;
    endcase
    br_taken = idex.valid && ((idex.is_branch && br_taken) || idex.is_jal || idex.is_jalr);
    br_target = idex.is_jalr ? ((x1 + idex.imm) & ~32'd1) : (idex.pc + idex.imm);

    if (idex.is_jal || idex.is_jalr)            ex_result = idex.pc + 32'd4;
    else if (idex.is_load || idex.is_store)     ex_result = x1 + idex.imm;
    else                                        ex_result = alu_res;
  end

  // accelerator handshake state of the instruction in Execute
  logic acc_issued, acc_finished;
  assign acc_valid       = idex.valid && idex.is_acc && !acc_issued;
  assign acc_cmd.op      = idex.acc_op;
  assign acc_cmd.funct7  = idex.funct7;
  assign acc_cmd.rd_val  = xrd;
  assign acc_cmd.rs1_val = x1;
  assign acc_cmd.rs2_val = x2;
  assign acc_cmd.rs3_val = x3;

  // ------------------------------------------------------------ memory
  logic [1:0] boff;
  assign boff       = exmem.result[1:0];
  assign dmem_req   = exmem.valid && (exmem.is_load || exmem.is_store);
  assign dmem_we    = exmem.is_store;
  assign dmem_addr  = {exmem.result[31:2], 2'b00};
  always_comb begin
    unique case (exmem.funct3[1:0])
      2'b00:   begin dmem_be = 4'b0001 << boff; dmem_wdata = {4{exmem.store_data[7:0]}}; end
      2'b01:   begin dmem_be = 4'b0011 << boff; dmem_wdata = {2{exmem.store_data[15:0]}}; end
      default: begin dmem_be = 4'b1111;         dmem_wdata = exmem.store_data; end
    endcase
  end

  logic [31:0] load_val;
  always_comb begin
    logic [31:0] sh;
    sh = dmem_rdata >> (8 * boff);
    unique case (exmem.funct3)
      3'b000:  load_val = {{24{sh[7]}}, sh[7:0]};
      3'b001:  load_val = {{16{sh[15]}}, sh[15:0]};
      3'b100:  load_val = {24'd0, sh[7:0]};
      3'b101:  load_val = {16'd0, sh[15:0]};
      default: load_val = dmem_rdata;
    endcase
  end

  // ------------------------------------------------------------ stall control
  logic mem_stall, acc_stall, load_use, id_stall, ex_adv;
  assign mem_stall = dmem_req && !dmem_ready;
  assign acc_stall = idex.valid && idex.is_acc && !(acc_finished || acc_done);
  assign load_use  = idex.valid && idex.is_load && idex.rd != 5'd0 && ifid.valid &&
                     ((idex_n.uses_rs1 && idex_n.rs1 == idex.rd) ||
                      (idex_n.uses_rs2 && idex_n.rs2 == idex.rd) ||
                      (idex_n.uses_rs3 && idex_n.rs3 == idex.rd) ||
                      (idex_n.uses_rd  && d_rdsrc    == idex.rd));
  assign ex_adv    = !mem_stall && !acc_stall;        // Execute hands over to Memory
  assign id_stall  = !ex_adv || load_use;             // Decode holds its instruction

  assign imem_req  = !halted;
  assign imem_addr = pc_f;

  logic redirect;
  assign redirect = br_taken && ex_adv;

  // ------------------------------------------------------------ pipeline registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_f         <= RESET_PC;
      ifid         <= '0;
      idex         <= '0;
      exmem        <= '0;
      memwb        <= '0;
      acc_issued   <= 1'b0;
      acc_finished <= 1'b0;
      halted       <= 1'b0;
      retired      <= '0;
    end else begin
      // Writeback
      if (memwb.valid) retired <= retired + 32'd1;
      if (memwb.valid && memwb.is_ebreak) halted <= 1'b1;

      // Memory -> Writeback
      if (mem_stall) memwb <= '0;
      else begin
        memwb.valid     <= exmem.valid;
        memwb.rd        <= exmem.rd;
        memwb.result    <= exmem.is_load ? load_val : exmem.result;
        memwb.reg_write <= exmem.reg_write;
        memwb.is_ebreak <= exmem.is_ebreak;
      end

      // Execute -> Memory
      if (!mem_stall) begin
        if (acc_stall) exmem <= '0;
        else begin
          exmem.valid      <= idex.valid;
          exmem.rd         <= idex.rd;
          exmem.result     <= ex_result;
          exmem.store_data <= x2;
          exmem.funct3     <= idex.funct3;
          exmem.is_load    <= idex.is_load;
          exmem.is_store   <= idex.is_store;
          exmem.reg_write  <= idex.reg_write;
          exmem.is_ebreak  <= idex.is_ebreak;
        end
      end

      // accelerator handshake bookkeeping
      if (ex_adv) begin
        acc_issued   <= 1'b0;
        acc_finished <= 1'b0;
      end else begin
        if (acc_valid && acc_ready) acc_issued <= 1'b1;
        if (acc_done) acc_finished <= 1'b1;
      end

      // Decode -> Execute
      if (!ex_adv) begin
        // hold, but capture forwarded operands: their producers move on
        idex.v1   <= x1;
        idex.v2   <= x2;
        idex.v3   <= x3;
        idex.v_rd <= xrd;
      end else if (redirect || load_use) begin
        idex <= '0;
      end else begin
        idex <= idex_n;
      end

      // Fetch -> Decode, PC
      if (redirect) begin
        ifid  <= '0;
        pc_f  <= br_target;
      end else if (!id_stall) begin
        if (imem_ready && imem_req) begin
          ifid.valid <= 1'b1;
          ifid.pc    <= pc_f;
          ifid.instr <= imem_rdata;
          pc_f       <= pc_f + 32'd4;
        end else begin
          ifid <= '0;
        end
      end
    end
  end

  // An accepted accelerator command is never re-issued.
  assert property (@(posedge clk) disable iff (!rst_n) acc_issued |-> !acc_valid);

endmodule

// soc_pkg: types and constants shared by the RISC-V core, its caches, the
// AXI4 memory system and the neural-network accelerator overlay.
//
// The AXI4 data bus and the AXI4-Lite control bus are both 32 bits wide and
// are carried as request/response struct pairs (one struct per direction).
// Only the AXI signals the design needs are present: no IDs (the interconnect
// keeps one transaction in flight), no cache/prot/QoS fields.
//
// The custom-0 opcode (0001011) and the funct3 codes of the four FPGA.*
// instructions follow the paper's instruction-format table. Fixed-point
// formats follow the paper too: activations Q8.8, weights Q12.4, both 16 bit.
package soc_pkg;

  // ---------------------------------------------------------------- RISC-V
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_FENCE  = 7'b0001111;
  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;

  // FPGA.* operation, selected by funct3 of a custom-0 instruction.
  typedef enum logic [2:0] {
    ACC_VCONV  = 3'b000,
    ACC_GEMM   = 3'b001,
    ACC_RELU   = 3'b010,
    ACC_CUSTOM = 3'b111
  } acc_op_e;

  // Operands of one FPGA.* instruction as handed from the core to the overlay.
  typedef struct packed {
    acc_op_e     op;
    logic [6:0]  funct7;
    logic [31:0] rd_val;   // output address (rd is read, not written)
    logic [31:0] rs1_val;  // input address
    logic [31:0] rs2_val;  // weight address / length
    logic [31:0] rs3_val;  // packed configuration
  } acc_cmd_t;

  // Memory map.
  localparam logic [31:0] ACCEL_BASE = 32'hA000_0000;
  localparam logic [31:0] ACCEL_MASK = 32'hFFFF_0000;  // 64 KB window

  // ---------------------------------------------------------------- AXI4
  typedef struct packed {
    logic [31:0] addr;
    logic [7:0]  len;    // beats - 1
    logic [2:0]  size;   // always 3'b010 (4 bytes)
    logic [1:0]  burst;  // always INCR
  } axi_ax_t;

  typedef struct packed {
    logic [31:0] data;
    logic [3:0]  strb;
    logic        last;
  } axi_w_t;

  typedef struct packed {
    logic [31:0] data;
    logic [1:0]  resp;
    logic        last;
  } axi_r_t;

  typedef struct packed {
    axi_ax_t aw;
    logic    aw_valid;
    axi_w_t  w;
    logic    w_valid;
    logic    b_ready;
    axi_ax_t ar;
    logic    ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    w_ready;
    logic [1:0] b_resp;
    logic    b_valid;
    logic    ar_ready;
    axi_r_t  r;
    logic    r_valid;
  } axi_rsp_t;

  localparam logic [1:0] AXI_INCR = 2'b01;
  localparam logic [2:0] AXI_SIZE4 = 3'b010;

  // ---------------------------------------------------------------- AXI4-Lite
  typedef struct packed {
    logic [31:0] aw_addr;
    logic        aw_valid;
    logic [31:0] w_data;
    logic [3:0]  w_strb;
    logic        w_valid;
    logic        b_ready;
    logic [31:0] ar_addr;
    logic        ar_valid;
    logic        r_ready;
  } axil_req_t;

  typedef struct packed {
    logic        aw_ready;
    logic        w_ready;
    logic [1:0]  b_resp;
    logic        b_valid;
    logic        ar_ready;
    logic [31:0] r_data;
    logic [1:0]  r_resp;
    logic        r_valid;
  } axil_rsp_t;

  // ---------------------------------------------------------------- DMA
  // One DMA command moves n_elem 16-bit elements, packed two per 32-bit word
  // (element 2i in bits 15:0), starting at a word-aligned byte address.
  typedef struct packed {
    logic        write;   // 1: accelerator -> memory
    logic [31:0] addr;
    logic [19:0] n_elem;
  } dma_cmd_t;

  // ---------------------------------------------------------------- fixed point
  // Q8.8 activation x Q12.4 weight = Q20.12 product; back to Q8.8 by >>> 4.
  function automatic logic signed [15:0] sat_q88(input logic signed [47:0] acc_q12);
    logic signed [47:0] s;
    s = acc_q12 >>> 4;
    if (s > 48'sd32767)       return 16'sh7FFF;
    else if (s < -48'sd32768) return 16'sh8000;
    else                      return s[15:0];
  endfunction

endpackage

// fpga_riscv_soc: the complete system: an RV32IM 5-stage core with 4 KB
// instruction and data caches, a 64 KB BRAM main memory on a 32-bit AXI4
// data bus, and the neural-network accelerator overlay (FPGA.VCONV 4 x 4
// systolic convolution, FPGA.GEMM 8 x 8 weight-stationary systolic array,
// FPGA.RELU 16-lane activation unit, FPGA.CUSTOM) that the core drives with
// custom-0 instructions. The block list and sizes follow the paper; how the
// blocks are joined is this design's own.
//
//   rv_core --imem--> icache ----------\
//           --dmem--> dcache -----------+--> axi_arbiter --> axi_bram (64 KB)
//                 \-> axil_master --.   |
//           --acc---> accel_dispatch +--/ (shared DMA)
//                                    |
//                     accel_csr <----'  (AXI4-Lite, 0xA0000000, 64 KB)
//
// Memory map: 0x00000000-0x0000FFFF BRAM (aliased every 64 KB), the window
// 0xA0000000-0xA000FFFF the accelerator register block (uncached, over
// AXI4-Lite). The core starts at address 0 after reset. The paper's two
// 50 MHz clocks are frequency-locked outputs of one MMCM, so the whole design
// runs on the single clock `clk`; the MMCM, the Zynq's ARM processors and its
// DDR3 memory are outside this RTL. `halted` reports that the program has
// executed EBREAK; `retired` counts retired instructions.
//
// rst_n is an asynchronous reset for every flip-flop; lint tools may note
// that it is also sampled synchronously, which comes only from the
// `disable iff (!rst_n)` clauses of the handshake assertions, not from logic.
module fpga_riscv_soc
  import soc_pkg::*;
#(
  parameter int unsigned MEM_BYTES    = 65536,  // paper: 64 KB BRAM
  parameter int unsigned ICACHE_BYTES = 4096,   // paper: 4 KB
  parameter int unsigned DCACHE_BYTES = 4096,   // paper: 4 KB
  parameter int unsigned LINE_BYTES   = 32      // paper: 32-byte lines
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        halted,
  output logic [31:0] retired,
  output logic        accel_busy
);
  // core <-> caches
  logic        imem_req, imem_ready;
  logic [31:0] imem_addr, imem_rdata;
  logic        dmem_req, dmem_we, dmem_ready;
  logic [3:0]  dmem_be;
  logic [31:0] dmem_addr, dmem_wdata, dmem_rdata;
  logic        acc_valid, acc_ready, acc_done, dcache_inval;
  acc_cmd_t    acc_cmd;

  rv_core u_core (
    .clk, .rst_n,
    .imem_req, .imem_addr, .imem_rdata, .imem_ready,
    .dmem_req, .dmem_we, .dmem_be, .dmem_addr, .dmem_wdata, .dmem_rdata, .dmem_ready,
    .acc_valid, .acc_cmd, .acc_ready, .acc_done,
    .halted, .retired
  );

  // data accesses: accelerator window over AXI4-Lite, the rest through the D-cache
  logic        sel_accel;
  logic        dc_ready, lite_ready;
  logic [31:0] dc_rdata, lite_rdata;
  assign sel_accel  = (dmem_addr & ACCEL_MASK) == ACCEL_BASE;
  assign dmem_ready = sel_accel ? lite_ready : dc_ready;
  assign dmem_rdata = sel_accel ? lite_rdata : dc_rdata;

  axi_req_t m_req [3];
  axi_rsp_t m_rsp [3];
  axi_req_t s_req;
  axi_rsp_t s_rsp;

  icache #(.SIZE_BYTES(ICACHE_BYTES), .LINE_BYTES(LINE_BYTES)) u_icache (
    .clk, .rst_n, .inval(1'b0),
    .req(imem_req), .addr(imem_addr), .rdata(imem_rdata), .ready(imem_ready),
    .axi_req(m_req[0]), .axi_rsp(m_rsp[0])
  );

  dcache #(.SIZE_BYTES(DCACHE_BYTES), .LINE_BYTES(LINE_BYTES)) u_dcache (
    .clk, .rst_n, .inval(dcache_inval),
    .req(dmem_req && !sel_accel), .we(dmem_we), .be(dmem_be), .addr(dmem_addr),
    .wdata(dmem_wdata), .rdata(dc_rdata), .ready(dc_ready),
    .axi_req(m_req[1]), .axi_rsp(m_rsp[1])
  );

  // AXI4-Lite control bus to the accelerator registers
  axil_req_t lite_req;
  axil_rsp_t lite_rsp;

  axil_master u_lite (
    .clk, .rst_n,
    .req(dmem_req && sel_accel), .we(dmem_we), .be(dmem_be), .addr(dmem_addr),
    .wdata(dmem_wdata), .rdata(lite_rdata), .ready(lite_ready),
    .axil_req(lite_req), .axil_rsp(lite_rsp)
  );

  logic [31:0] acc_count [4];
  logic [31:0] busy_cycles, mac_cycles, acc_errors;

  accel_dispatch u_accel (
    .clk, .rst_n,
    .acc_valid, .acc_cmd, .acc_ready, .acc_done, .dcache_inval,
    .busy(accel_busy), .count(acc_count), .busy_cycles, .mac_cycles, .errors(acc_errors),
    .axi_req(m_req[2]), .axi_rsp(m_rsp[2])
  );

  accel_csr u_csr (
    .clk, .rst_n, .axil_req(lite_req), .axil_rsp(lite_rsp),
    .busy(accel_busy), .count(acc_count), .busy_cycles, .mac_cycles, .errors(acc_errors)
  );

  // AXI4 interconnect and main memory
  axi_arbiter #(.NM(3)) u_xbar (
    .clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp
  );

  axi_bram #(.BYTES(MEM_BYTES)) u_mem (
    .clk, .rst_n, .req(s_req), .rsp(s_rsp)
  );

endmodule

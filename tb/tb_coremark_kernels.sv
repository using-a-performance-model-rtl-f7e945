// tb_coremark_kernels: runs three small programs modelled on the kernels of
// the CoreMark benchmark on the core at its default parameters, and reports
// the cycle count and retirement rate (IPC) of each.
//
// CoreMark itself needs a C toolchain, division, and a timer for its
// reporting, none of which this environment has, so the kernels are written
// here in assembly (with the encoders of rv_asm_pkg), in ss_kernels.svh,
// which tb_ss_cva6_core_nospec also runs:
// - crc16: CoreMark's bit-serial CRC-16 update (polynomial bits 0x4002,
//   one data-dependent branch per bit) over 32 bytes;
// - matmul: 4x4 32-bit matrix product with MUL, column addresses formed
//   with SH2ADD (Zba);
// - list: pointer-chasing walk of a 16-node linked list laid out in a
//   random order, summing the values, counting nodes and keeping the
//   maximum with MAX (Zbb).
// Every retirement is checked against the reference instruction-set model
// and the final data memory against its copy (the shared environment in
// ss_core_env.svh). Each kernel's stored results are also compared with
// values computed here in SystemVerilog from the same input data. The rates
// printed are this reduced core's, on these kernels; they are not a CoreMark
// score.
`timescale 1ns/1ps
module tb_coremark_kernels;
  import ss_pkg::*;
  import rv_asm_pkg::*;

  localparam int IMEM_WORDS = 128;
  localparam int DMEM_WORDS = 256;
  localparam logic [31:0] DBASE = 32'h0000_1000;

  `include "ss_core_env.svh"

  ss_cva6_core dut (
    .clk_i(clk), .rst_ni(rst_n),
    .fetch_valid_i(fetch_valid), .fetch_i(fetch), .fetch_ready_o(fetch_ready),
    .redirect_valid_o(redirect_valid), .redirect_pc_o(redirect_pc),
    .dmem_req_o(dmem_req), .dmem_raddr_o(dmem_raddr), .dmem_rdata_i(dmem_rdata),
    .dmem_we_o(dmem_we), .dmem_waddr_o(dmem_waddr), .dmem_wdata_o(dmem_wdata), .dmem_be_o(dmem_be),
    .commit_o(commit), .perf_o(perf)
  );

  `include "ss_kernels.svh"

  initial begin
    run_kernels(50, 50, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

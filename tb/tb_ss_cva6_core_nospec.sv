// tb_ss_cva6_core_nospec: end-to-end test of the core with the speculative
// scoreboard turned off (SPEC_SB_EN = 0), the configuration without
// same-cycle issue beside a control flow.
//
// Runs the same kind of random programs as the default-configuration test,
// with every retirement checked against the reference model and data memory
// compared at the end. It then checks what the option changes: the
// instruction after a branch or jump never issues in the same cycle as it
// (port 1 stays idle beside a control flow), so no wrong-path instruction
// ever reaches the scoreboard and no entry is ever retired as cancelled,
// although mispredicts happen. Dual issue of other pairs must still occur.
// Finally it runs the three CoreMark-style kernels of ss_kernels.svh and
// prints their retirement rates, for comparison with the default
// configuration's (tb_coremark_kernels); the bound checked here is a loose
// 0.40 instructions per cycle.
`timescale 1ns/1ps
module tb_ss_cva6_core_nospec;
  import ss_pkg::*;
  import rv_asm_pkg::*;

  localparam int IMEM_WORDS = 512;
  localparam int DMEM_WORDS = 256;
  localparam logic [31:0] DBASE = 32'h0000_1000;
  localparam int NPROG = 10;

  `include "ss_core_env.svh"

  ss_cva6_core #(.SPEC_SB_EN(1'b0)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .fetch_valid_i(fetch_valid), .fetch_i(fetch), .fetch_ready_o(fetch_ready),
    .redirect_valid_o(redirect_valid), .redirect_pc_o(redirect_pc),
    .dmem_req_o(dmem_req), .dmem_raddr_o(dmem_raddr), .dmem_rdata_i(dmem_rdata),
    .dmem_we_o(dmem_we), .dmem_waddr_o(dmem_waddr), .dmem_wdata_o(dmem_wdata), .dmem_be_o(dmem_be),
    .commit_o(commit), .perf_o(perf)
  );

  `include "ss_rand_prog.svh"
  `include "ss_kernels.svh"

  int n_dual_issue = 0, n_ctrl_pair = 0, n_mispredict = 0, n_cancelled = 0, n_store_commit = 0;
  always_ff @(posedge clk) if (rst_n) begin
    n_dual_issue   <= n_dual_issue + int'(perf.dual_issue);
    n_ctrl_pair    <= n_ctrl_pair + int'(perf.ctrl_pair);
    n_mispredict   <= n_mispredict + int'(redirect_valid);
    n_cancelled    <= n_cancelled + int'(commit[0].valid && commit[0].cancelled)
                                  + int'(commit[1].valid && commit[1].cancelled);
    n_store_commit <= n_store_commit + int'(dmem_we);
  end

  initial begin
    longint used;
    running = 0;
    for (int p = 0; p < NPROG; p++) begin
      for (int i = 0; i < DMEM_WORDS; i++) dinit[i] = $urandom;
      gen_random_program(60, 20);
      run_program(20000, used);
      $display("program %0d: %0d instructions in %0d cycles", p, ncommitted, used);
    end
    run_kernels(40, 40, 40);
    $display("events: dual_issue=%0d ctrl_pair=%0d mispredict=%0d cancelled=%0d store_commit=%0d",
             n_dual_issue, n_ctrl_pair, n_mispredict, n_cancelled, n_store_commit);
    checks += 5;
    if (n_ctrl_pair != 0) begin failures++; $display("issued beside a control flow"); end
    if (n_cancelled != 0) begin failures++; $display("cancelled entries retired"); end
    if (n_mispredict == 0) begin failures++; $display("no mispredict"); end
    if (n_dual_issue == 0) begin failures++; $display("no dual issue"); end
    if (n_store_commit == 0) begin failures++; $display("no store"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

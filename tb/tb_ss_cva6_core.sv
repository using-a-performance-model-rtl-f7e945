// tb_ss_cva6_core: end-to-end test of the dual-issue core on generated
// RV32IMC + Zba/Zbb/Zbc/Zbs programs, at the default parameters.
//
// The testbench plays the frontend and the memories. Its frontend fetches up
// to two instructions per cycle (32-bit or 16-bit) from an aligned 64-bit
// block, predicts JAL taken, backward branches taken, forward branches not
// taken, compressed branches taken and JALR not taken, and restarts at the
// redirect address after a mispredict. Compressed instructions are emitted
// in pairs that fill one 32-bit word, so 32-bit instructions stay aligned;
// the generator records the expansion of each one for the reference model. Instruction memory
// is an array; data memory answers reads one cycle after the request.
// A reference instruction-set model in the testbench executes the same
// program one instruction at a time; every non-cancelled retirement of the
// core is compared with it (pc, destination, value), and data memory is
// compared at the end.
// Phase 1 is a block of 24 independent ALU instructions, which must retire at
// the scoreboard-bound rate of NR_SB_ENTRIES/3 per cycle (checked on the
// cycle count). Phase 2 runs random loop programs (ALU, bit manipulation,
// LUI/AUIPC, multiplications, carry-less multiplications, loads, stores,
// forward branches, an indirect jump and a loop branch). The test counts how often each
// mechanism of the core occurs and fails for one that never does. The
// frontend, memories and reference model are in ss_core_env.svh, the
// program generator in ss_rand_prog.svh.
`timescale 1ns/1ps
module tb_ss_cva6_core;
  import ss_pkg::*;
  import rv_asm_pkg::*;

  localparam int IMEM_WORDS = 512;
  localparam int DMEM_WORDS = 64;
  localparam logic [31:0] DBASE = 32'h0000_1000;
  localparam int NPROG = 30;

  `include "ss_core_env.svh"


  ss_cva6_core dut (
    .clk_i(clk), .rst_ni(rst_n),
    .fetch_valid_i(fetch_valid), .fetch_i(fetch), .fetch_ready_o(fetch_ready),
    .redirect_valid_o(redirect_valid), .redirect_pc_o(redirect_pc),
    .dmem_req_o(dmem_req), .dmem_raddr_o(dmem_raddr), .dmem_rdata_i(dmem_rdata),
    .dmem_we_o(dmem_we), .dmem_waddr_o(dmem_waddr), .dmem_wdata_o(dmem_wdata), .dmem_be_o(dmem_be),
    .commit_o(commit), .perf_o(perf)
  );

  `include "ss_rand_prog.svh"

  // ---------------- event counters
  int n_dual_issue, n_raw_fwd, n_raw_stall, n_waw, n_pair, n_struct, n_alu1, n_full,
      n_one_free, n_load_wait, n_ctrl_pair, n_mispredict, n_cancelled, n_dual_commit,
      n_store_commit, n_store_discard, n_mult_block;
  always_ff @(posedge clk) if (rst_n) begin
    n_dual_issue   <= n_dual_issue + int'(perf.dual_issue);
    n_raw_fwd      <= n_raw_fwd + int'(perf.raw_forward);
    n_raw_stall    <= n_raw_stall + int'(perf.raw_stall);
    n_waw          <= n_waw + int'(perf.waw_stall);
    n_pair         <= n_pair + int'(perf.pair_stall);
    n_struct       <= n_struct + int'(perf.struct_stall);
    n_alu1         <= n_alu1 + int'(perf.alu1_used);
    n_full         <= n_full + int'(perf.sb_full);
    n_one_free     <= n_one_free + int'(perf.sb_one_free);
    n_load_wait    <= n_load_wait + int'(perf.load_wait);
    n_ctrl_pair    <= n_ctrl_pair + int'(perf.ctrl_pair);
    n_mispredict   <= n_mispredict + int'(redirect_valid);
    n_cancelled    <= n_cancelled + int'(commit[0].valid && commit[0].cancelled)
                                  + int'(commit[1].valid && commit[1].cancelled);
    n_dual_commit  <= n_dual_commit + int'(commit[0].valid && commit[1].valid);
    n_store_commit <= n_store_commit + int'(dmem_we);
    n_store_discard <= n_store_discard + int'(dut.discard_store);
    n_mult_block   <= n_mult_block + int'(dut.i_iro.mult_q && perf.struct_stall);
  end

  initial begin
    longint used;
    n_dual_issue = 0; n_raw_fwd = 0; n_raw_stall = 0; n_waw = 0; n_pair = 0; n_struct = 0;
    n_alu1 = 0; n_full = 0; n_one_free = 0; n_load_wait = 0; n_ctrl_pair = 0; n_mispredict = 0;
    n_cancelled = 0; n_dual_commit = 0; n_store_commit = 0; n_store_discard = 0; n_mult_block = 0;
    running = 0;

    // phase 1: 24 independent ALU instructions retire at two per cycle
    gen_alu_block(24);
    for (int i = 0; i < DMEM_WORDS; i++) dinit[i] = $urandom;
    run_program(200, used);
    checks++;
    // an entry is held from the cycle after issue until the cycle after
    // commit, three cycles for an ALU instruction, so NR_SB_ENTRIES entries
    // sustain NR_SB_ENTRIES/3 instructions per cycle (under two, the issue width)
    if (last_commit - first_commit + 1 > 25 * 3 / NR_SB_ENTRIES + 1 ||
        last_commit - first_commit + 1 < 25 * 3 / NR_SB_ENTRIES - 1) begin
      failures++;
      $display("ALU block: %0d instructions retired over %0d cycles, expected %0d",
               ncommitted, last_commit - first_commit + 1, 25 * 3 / NR_SB_ENTRIES);
    end
    $display("ALU block: %0d retired in %0d cycles", ncommitted, last_commit - first_commit + 1);

    // phase 2: random programs
    for (int p = 0; p < NPROG; p++) begin
      gen_random_program(60, 20);
      for (int i = 0; i < DMEM_WORDS; i++) dinit[i] = $urandom;
      run_program(20000, used);
      $display("program %0d: %0d instructions in %0d cycles", p, ncommitted, used);
    end

    $display("events: dual_issue=%0d raw_forward=%0d raw_stall=%0d waw_stall=%0d pair_stall=%0d struct_stall=%0d mult_wb_block=%0d alu1=%0d sb_full=%0d sb_one_free=%0d load_wait=%0d ctrl_pair=%0d mispredict=%0d cancelled=%0d dual_commit=%0d store_commit=%0d store_discard=%0d rvc=%0d",
             n_dual_issue, n_raw_fwd, n_raw_stall, n_waw, n_pair, n_struct, n_mult_block, n_alu1, n_full,
             n_one_free, n_load_wait, n_ctrl_pair, n_mispredict, n_cancelled, n_dual_commit,
             n_store_commit, n_store_discard, n_rvc);
    check_seen(n_dual_issue, "dual issue");
    check_seen(n_raw_fwd, "RAW forwarding");
    check_seen(n_raw_stall, "RAW stall");
    check_seen(n_waw, "WAW stall");
    check_seen(n_pair, "pair dependency stall");
    check_seen(n_struct, "structural stall");
    check_seen(n_mult_block, "multiplier write-back port block");
    check_seen(n_alu1, "second ALU");
    check_seen(n_full, "scoreboard full");
    check_seen(n_one_free, "scoreboard one free");
    check_seen(n_load_wait, "load behind store");
    check_seen(n_ctrl_pair, "issue with a control flow");
    check_seen(n_mispredict, "mispredict");
    check_seen(n_cancelled, "cancelled retirement");
    check_seen(n_dual_commit, "dual commit");
    check_seen(n_store_commit, "store commit");
    check_seen(n_store_discard, "cancelled store");
    check_seen(n_rvc, "compressed instruction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_seen(input int n, input string what);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never seen: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_commit_stage: random pairs of scoreboard head entries against a reference
// of the commit rules: port 0 retires a done entry; port 1 only with port 0,
// when done and not a store; cancelled entries are acknowledged without a
// register write; a store on port 0 is committed, or discarded if cancelled.
`timescale 1ns/1ps
module tb_commit_stage;
  import ss_pkg::*;
  int checks = 0, failures = 0, n_two = 0, n_store_block = 0;
  sb_commit_t [1:0] sb; logic [1:0] ack, we; logic [1:0][4:0] wa; xlen_t [1:0] wd;
  logic cst, dst; commit_trace_t [1:0] tr;
  commit_stage dut (.sb_i(sb), .ack_o(ack), .rf_we_o(we), .rf_waddr_o(wa), .rf_wdata_o(wd),
                    .commit_store_o(cst), .discard_store_o(dst), .commit_o(tr));
  initial begin
    for (int i = 0; i < 5000; i++) begin
      logic [1:0] eack, ewe; logic ecst, edst;
      for (int k = 0; k < 2; k++) begin
        sb[k].valid = ($urandom_range(0, 5) != 0);
        sb[k].done = ($urandom_range(0, 3) != 0);
        sb[k].cancelled = ($urandom_range(0, 4) == 0);
        sb[k].is_store = ($urandom_range(0, 3) == 0);
        sb[k].pc = $urandom; sb[k].result = $urandom;
        sb[k].rd = sb[k].is_store ? 5'd0 : 5'($urandom_range(0, 7));
      end
      eack[0] = sb[0].valid && sb[0].done;
      eack[1] = eack[0] && sb[1].valid && sb[1].done && !sb[1].is_store;
      for (int k = 0; k < 2; k++) ewe[k] = eack[k] && !sb[k].cancelled && sb[k].rd != 0;
      ecst = eack[0] && sb[0].is_store && !sb[0].cancelled;
      edst = eack[0] && sb[0].is_store && sb[0].cancelled;
      #1;
      checks++;
      if (ack !== eack || we !== ewe || cst !== ecst || dst !== edst ||
          (we[0] && (wa[0] !== sb[0].rd || wd[0] !== sb[0].result)) ||
          (we[1] && (wa[1] !== sb[1].rd || wd[1] !== sb[1].result)) ||
          tr[0].valid !== eack[0] || tr[1].valid !== eack[1] || (eack[0] && tr[0].pc !== sb[0].pc)) begin
        failures++;
        if (failures < 10) $display("ack %b exp %b we %b exp %b st %b%b exp %b%b", ack, eack, we, ewe,
                                    cst, dst, ecst, edst);
      end
      if (eack == 2'b11) n_two++;
      if (eack[0] && sb[1].valid && sb[1].done && sb[1].is_store) n_store_block++;
    end
    checks++;
    if (n_two == 0 || n_store_block == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

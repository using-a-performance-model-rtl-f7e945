// tb_scoreboard: directed sequence on the default 4-entry scoreboard.
// Checks issue indexes, the full and one-free flags derived from the odd and
// even entries, write-back forwarding in the same cycle, in-order commit of up
// to two entries, wrap-around of both pointers, and the partial flush: after a
// mispredict, exactly the entries between the branch and the issue pointer
// (cyclically) are cancelled, and a late write-back into a cancelled entry
// does not clear the flag.
`timescale 1ns/1ps
module tb_scoreboard;
  import ss_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] iss, ack; instr_t [1:0] ins; logic [1:0][1:0] iid; logic full, one;
  sb_view_t [3:0] view; wb_t [3:0] wb; bres_t br; logic [3:0] canc; sb_commit_t [1:0] cm;
  scoreboard dut (.clk_i(clk), .rst_ni(rst_n), .issue_i(iss), .issue_instr_i(ins), .issue_id_o(iid),
                  .full_o(full), .one_free_o(one), .view_o(view), .wb_i(wb), .bres_i(br),
                  .cancelled_o(canc), .commit_o(cm), .commit_ack_i(ack));

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic instr_t mk(input int rd, input fu_t fu = FU_ALU);
    instr_t i = '0;
    i.rd = 5'(rd); i.fu = fu; i.pc = 32'(rd * 4);
    return i;
  endfunction

  task automatic step();
    @(posedge clk); #1;
    iss = 0; ack = 0; wb = '0; br = '0;
  endtask

  initial begin
    iss = 0; ack = 0; wb = '0; br = '0; ins = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(!full && !one, "empty scoreboard: room for two");
    // issue two, then one, then one
    iss = 2'b11; ins[0] = mk(5); ins[1] = mk(6); #1;
    chk(iid[0] == 0 && iid[1] == 1, "first issue indexes 0 and 1");
    step();
    chk(!full && !one, "two free");
    iss = 2'b01; ins[0] = mk(7, FU_STORE); step();
    chk(!full && one, "one free: odd or even all occupied");
    iss = 2'b01; ins[0] = mk(8); #1;
    chk(iid[0] == 3, "fourth entry index 3");
    step();
    chk(full && one, "full: odd and even all occupied");
    chk(view[2].is_store && view[1].rd == 6 && !view[1].avail, "entry contents");
    // write-back of entry 1 on the FPU port: visible in the same cycle
    wb[WB_FPU] = '{valid: 1'b1, trans_id: 2'd1, data: 32'h1234}; #1;
    chk(view[1].avail && view[1].value == 32'h1234, "same-cycle forwarding from a write-back port");
    chk(cm[0].valid && !cm[0].done, "head not done");
    step();
    chk(view[1].avail && view[1].value == 32'h1234 && cm[1].done, "entry 1 done");
    wb[WB_FLU] = '{valid: 1'b1, trans_id: 2'd0, data: 32'h55}; step();
    chk(cm[0].done && cm[0].rd == 5 && cm[0].result == 32'h55, "head done with its result");
    ack = 2'b11; step();
    chk(!full && !one, "two committed: two free");
    chk(cm[0].pc == 28 && cm[0].is_store, "head moved to entry 2");
    // wrap the issue pointer: entries 0 and 1 again
    iss = 2'b11; ins[0] = mk(9); ins[1] = mk(10); #1;
    chk(iid[0] == 0 && iid[1] == 1, "issue pointer wrapped");
    step();
    chk(full, "full again");
    // branch in entry 3 mispredicts: entries 0 and 1 (after the wrap) are cancelled
    br = '{valid: 1'b1, mispredict: 1'b1, trans_id: 2'd3, target: '0};
    step();
    chk(canc == 4'b0011, $sformatf("cancel after entry 3 with issue pointer 2: %b", canc));
    // late write-back into a cancelled entry
    wb[WB_LOAD] = '{valid: 1'b1, trans_id: 2'd0, data: 32'h99}; step();
    chk(view[0].cancelled && view[0].avail, "cancelled entry still completes");
    // commit entries 2 and 3, then the cancelled 0 and 1
    wb[WB_STORE] = '{valid: 1'b1, trans_id: 2'd2, data: 0};
    wb[WB_FLU] = '{valid: 1'b1, trans_id: 2'd3, data: 0}; step();
    ack = 2'b01; step();
    ack = 2'b01; step();
    wb[WB_FLU] = '{valid: 1'b1, trans_id: 2'd1, data: 0}; step();
    chk(cm[0].cancelled && cm[1].cancelled && cm[0].done && cm[1].done, "cancelled entries at the head");
    ack = 2'b11; step();
    chk(!full && !one && !view[0].valid && !view[1].valid, "scoreboard empty");
    // mispredict with entries wrapping past the end: commit 2, issue 2,3,0
    iss = 2'b11; ins[0] = mk(11, FU_BRANCH); ins[1] = mk(12); step();
    iss = 2'b01; ins[0] = mk(13); step();
    br = '{valid: 1'b1, mispredict: 1'b1, trans_id: 2'd2, target: '0}; step();
    chk(canc == 4'b1001, $sformatf("cancel wraps from entry 3 to 0: %b", canc));
    // a new instruction issued after the flush is not cancelled
    iss = 2'b01; ins[0] = mk(14); step();
    chk(!canc[1] && view[1].valid, "instruction issued after the flush is live");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

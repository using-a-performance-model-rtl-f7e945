// tb_issue_read_operands: directed issue scenarios with a scoreboard view and
// register file driven by the testbench (register xN reads 0x100+N).
// Each scenario presents two instructions, checks which issue in that cycle,
// and the registered port outputs (unit and operands) in the next cycle:
// dual issue to ALU0 and ALU1, forwarding, RAW and WAW stalls, dependency
// inside the pair, scoreboard full and one-free, the multiplier's write-back
// port blocking ALU0 in the following cycle, a branch paired with the next
// instruction, loads behind stores, two branches, and flush.
`timescale 1ns/1ps
module tb_issue_read_operands;
  import ss_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush, full, one; logic [1:0] ibv, iss, pv; instr_t [1:0] ibi;
  sb_view_t [3:0] view; logic [1:0][1:0] iid; logic [3:0][4:0] ra; xlen_t [3:0] rd;
  unit_t [1:0] pu; fu_data_t [1:0] pd; issue_perf_t perf;
  issue_read_operands dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .ib_valid_i(ibv),
    .ib_instr_i(ibi), .issue_o(iss), .sb_full_i(full), .sb_one_free_i(one), .sb_view_i(view),
    .sb_issue_id_i(iid), .rf_raddr_o(ra), .rf_rdata_i(rd), .port_valid_o(pv), .port_unit_o(pu),
    .port_data_o(pd), .perf_o(perf));

  always_comb for (int r = 0; r < 4; r++) rd[r] = (ra[r] == 0) ? 0 : 32'h100 + 32'(ra[r]);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic instr_t alu(input int rd_, rs1, rs2, input fu_t fu = FU_ALU);
    instr_t i = '0;
    i.fu = fu; i.op = (fu == FU_MULT) ? OP_MUL : (fu == FU_BRANCH) ? OP_BEQ :
                      (fu == FU_LOAD) ? OP_LW : (fu == FU_STORE) ? OP_SW : OP_ADD;
    i.rd = 5'(rd_); i.rs1 = 5'(rs1); i.rs2 = 5'(rs2);
    i.use_rs1 = rs1 != 0; i.use_rs2 = rs2 != 0; i.pc = 32'h40;
    return i;
  endfunction

  // present a pair, check the issue decision, clock, return to idle
  task automatic pair(input instr_t i0, i1, input logic [1:0] exp, input string what);
    ibv = 2'b11; ibi[0] = i0; ibi[1] = i1; #1;
    chk(iss == exp, $sformatf("%s: issued %b, expected %b", what, iss, exp));
    @(posedge clk); #1;
    ibv = 0;
  endtask

  initial begin
    flush = 0; full = 0; one = 0; ibv = 0; ibi = '0; view = '0; iid[0] = 2; iid[1] = 3;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // independent ALU pair: ALU0 and ALU1
    pair(alu(3, 4, 5), alu(6, 7, 0), 2'b11, "independent pair");
    chk(pv == 2'b11 && pu[0] == U_ALU0 && pu[1] == U_ALU1, "units ALU0 and ALU1");
    chk(pd[0].a == 32'h104 && pd[0].b == 32'h105 && pd[1].a == 32'h107 && pd[1].b == 0,
        "operands from the register file");
    chk(pd[0].trans_id == 2 && pd[1].trans_id == 3, "trans_id from the scoreboard issue pointer");
    // RAW: forwarded when available, stall when not
    view[1] = '{valid: 1, cancelled: 0, rd: 5'd4, is_store: 0, avail: 1, value: 32'hAAAA};
    pair(alu(3, 4, 4), alu(6, 0, 0), 2'b11, "RAW with available result");
    chk(pd[0].a == 32'hAAAA && pd[0].b == 32'hAAAA, "forwarded operands");
    view[1].avail = 0;
    pair(alu(3, 4, 0), alu(6, 0, 0), 2'b00, "RAW with pending result");
    chk(pv == 2'b00, "nothing sent after a stall");
    // a cancelled producer is ignored
    view[1].cancelled = 1;
    pair(alu(3, 4, 0), alu(6, 0, 0), 2'b11, "cancelled producer ignored");
    chk(pd[0].a == 32'h104, "register value used");
    view[1].cancelled = 0; view[1].avail = 1;
    // WAW
    pair(alu(4, 5, 0), alu(6, 0, 0), 2'b00, "WAW on the first");
    pair(alu(3, 5, 0), alu(4, 0, 0), 2'b01, "WAW on the second");
    view[1] = '0;
    // dependencies inside the pair
    pair(alu(3, 5, 0), alu(6, 3, 0), 2'b01, "second reads the first's result");
    pair(alu(3, 5, 0), alu(3, 6, 0), 2'b01, "both write the same register");
    // scoreboard space
    one = 1;
    pair(alu(3, 0, 0), alu(6, 0, 0), 2'b01, "one free entry");
    full = 1;
    pair(alu(3, 0, 0), alu(6, 0, 0), 2'b00, "scoreboard full");
    full = 0; one = 0;
    // multiplier, then the write-back port of ALU0 and the branch unit is taken
    pair(alu(3, 1, 2, FU_MULT), alu(6, 0, 0), 2'b11, "multiplication and ALU");
    chk(pu[0] == U_MULT && pu[1] == U_ALU1, "ALU goes to ALU1 beside the multiplier");
    pair(alu(7, 0, 0), alu(8, 0, 0), 2'b01, "after a multiplication: one ALU left");
    chk(pu[0] == U_ALU1, "ALU0 blocked by the multiplier's write-back");
    pair(alu(7, 0, 0, FU_MULT), alu(8, 0, 0, FU_MULT), 2'b01, "two multiplications");
    pair(alu(0, 1, 2, FU_BRANCH), alu(9, 0, 0), 2'b00, "branch after multiplication: in-order stall");
    chk(pv == 2'b00, "nothing issued behind the blocked branch");
    // branch paired with the next instruction (speculative scoreboard)
    pair(alu(0, 1, 2, FU_BRANCH), alu(9, 0, 0), 2'b11, "branch and next instruction");
    chk(pu[0] == U_BRANCH && pu[1] == U_ALU1, "branch unit and ALU1");
    pair(alu(0, 1, 2, FU_BRANCH), alu(0, 3, 4, FU_BRANCH), 2'b01, "two branches");
    // loads behind stores
    pair(alu(0, 1, 2, FU_STORE), alu(5, 1, 0, FU_LOAD), 2'b01, "load behind a store of the pair");
    chk(pu[0] == U_LSU && pd[0].b == 32'h102, "store data operand");
    view[0] = '{valid: 1, cancelled: 0, rd: 5'd0, is_store: 1, avail: 1, value: 0};
    pair(alu(5, 1, 0, FU_LOAD), alu(6, 0, 0), 2'b00, "load behind a scoreboard store");
    view[0].cancelled = 1;
    pair(alu(5, 1, 0, FU_LOAD), alu(6, 0, 0), 2'b11, "cancelled store does not hold a load");
    view[0] = '0;
    // immediate and pc operands
    begin
      instr_t i = alu(3, 0, 0); i.use_pc = 1; i.use_imm = 1; i.imm = 32'h1000;
      pair(i, alu(6, 0, 0), 2'b11, "auipc-like");
      chk(pd[0].a == 32'h40 && pd[0].b == 32'h1000, "pc and immediate operands");
    end
    // flush
    flush = 1;
    pair(alu(3, 0, 0), alu(6, 0, 0), 2'b00, "flush");
    flush = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

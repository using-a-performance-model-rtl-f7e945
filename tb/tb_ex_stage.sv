// tb_ex_stage: drives the two issue ports of the execute stage directly.
// Checks that two ALU instructions write back together on the
// fixed-latency and FPU ports one cycle after issue, that a multiplication
// writes back two cycles after issue on the fixed-latency port, that a branch
// reports a mispredict with the correct target (and not when its entry is
// cancelled), and that a load and a committed store go through the data
// memory ports.
`timescale 1ns/1ps
module tb_ex_stage;
  import ss_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] pv; unit_t [1:0] pu; fu_data_t [1:0] pd; logic [3:0] canc;
  wb_t [3:0] wb; bres_t br; logic cs, ds, sqe, req, we; xlen_t ra, rdata, wa, wd; logic [3:0] be;
  ex_stage dut (.clk_i(clk), .rst_ni(rst_n), .port_valid_i(pv), .port_unit_i(pu), .port_data_i(pd),
                .sb_cancelled_i(canc), .wb_o(wb), .bres_o(br), .commit_store_i(cs),
                .discard_store_i(ds), .sq_empty_o(sqe), .dmem_req_o(req), .dmem_raddr_o(ra),
                .dmem_rdata_i(rdata), .dmem_we_o(we), .dmem_waddr_o(wa), .dmem_wdata_o(wd),
                .dmem_be_o(be));
  logic [31:0] mem [16];
  always_ff @(posedge clk) begin
    if (req) rdata <= mem[ra[5:2]];
    if (we) for (int b = 0; b < 4; b++) if (be[b]) mem[wa[5:2]][8*b +: 8] <= wd[8*b +: 8];
  end
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic fu_data_t fd(input op_t op, input logic [31:0] a, b, input int id);
    fu_data_t f = '0;
    f.op = op; f.a = a; f.b = b; f.trans_id = trans_id_t'(id); f.pc = 32'h80;
    return f;
  endfunction
  // the issue ports are registers: values set here are "issued" in the
  // previous cycle and seen by the units in this one
  task automatic idle(); @(negedge clk); pv = 0; endtask

  initial begin
    pv = 0; pu = '{U_ALU0, U_ALU0}; pd = '0; canc = 0; cs = 0; ds = 0;
    for (int i = 0; i < 16; i++) mem[i] = 32'h1000 + i;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // two ALU instructions
    pv = 2'b11; pu[0] = U_ALU0; pu[1] = U_ALU1;
    pd[0] = fd(OP_ADD, 5, 7, 0); pd[1] = fd(OP_SUB, 5, 7, 1); #1;
    chk(wb[WB_FLU].valid && wb[WB_FLU].data == 12 && wb[WB_FLU].trans_id == 0, "ALU0 on the FLU port");
    chk(wb[WB_FPU].valid && wb[WB_FPU].data == 32'hffff_fffe && wb[WB_FPU].trans_id == 1,
        "ALU1 on the FPU port");
    // multiplication on port 1, ALU1 on port 0
    @(negedge clk);
    pv = 2'b11; pu[0] = U_ALU1; pu[1] = U_MULT;
    pd[0] = fd(OP_OR, 1, 2, 2); pd[1] = fd(OP_MUL, 6, 7, 3); #1;
    chk(!wb[WB_FLU].valid && wb[WB_FPU].data == 3, "only the FPU port in the multiplication's first cycle");
    idle(); #1;
    chk(wb[WB_FLU].valid && wb[WB_FLU].data == 42 && wb[WB_FLU].trans_id == 3,
        "product on the FLU port one cycle later");
    // branch mispredict
    @(negedge clk);
    pv = 2'b01; pu[0] = U_BRANCH; pd[0] = fd(OP_BNE, 1, 2, 1); pd[0].imm = 32'h20;
    pd[0].bp_taken = 0; #1;
    chk(br.valid && br.mispredict && br.target == 32'ha0 && br.trans_id == 1, "branch mispredict");
    canc = 4'b0010; #1;
    chk(!br.mispredict, "a cancelled branch does not redirect");
    canc = 0;
    // load
    @(negedge clk);
    pv = 2'b10; pu[1] = U_LSU; pd[1] = fd(OP_LW, 32'h8, 0, 2); #1;
    chk(req && ra == 32'h8, "load request in the cycle after issue");
    idle(); #1;
    chk(wb[WB_LOAD].valid && wb[WB_LOAD].data == 32'h1002 && wb[WB_LOAD].trans_id == 2, "load result");
    // store, committed
    @(negedge clk);
    pv = 2'b01; pu[0] = U_LSU; pd[0] = fd(OP_SW, 32'hC, 32'hCAFE, 3);
    idle(); #1;
    chk(wb[WB_STORE].valid && wb[WB_STORE].trans_id == 3, "store write-back");
    chk(mem[3] == 32'h1003, "store not yet in memory");
    cs = 1; @(negedge clk); cs = 0; #1;
    chk(mem[3] == 32'hCAFE && sqe, "store committed to memory");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

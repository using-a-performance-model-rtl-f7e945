// tb_lsu: stores and loads of all sizes through the load/store unit with a
// one-cycle data memory. Checks: a store writes back two cycles after issue
// (one after entering the unit) but leaves memory untouched until it is
// committed; a discarded store never reaches memory; a load's value and its
// two-cycle latency; sign and zero extension; the queue empty flag.
`timescale 1ns/1ps
module tb_lsu;
  import ss_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic v, cs, ds, req, we, sqe; fu_data_t d; xlen_t ra, rdata, wa, wd; logic [3:0] be;
  wb_t lwb, swb;
  lsu dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(v), .data_i(d), .commit_store_i(cs),
           .discard_store_i(ds), .dmem_req_o(req), .dmem_raddr_o(ra), .dmem_rdata_i(rdata),
           .dmem_we_o(we), .dmem_waddr_o(wa), .dmem_wdata_o(wd), .dmem_be_o(be),
           .load_wb_o(lwb), .store_wb_o(swb), .sq_empty_o(sqe));
  logic [31:0] mem [16];
  always_ff @(posedge clk) begin
    if (req) rdata <= mem[ra[5:2]];
    if (we) for (int b = 0; b < 4; b++) if (be[b]) mem[wa[5:2]][8*b +: 8] <= wd[8*b +: 8];
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input op_t op, input logic [31:0] base, imm, sdata, input int id);
    @(negedge clk);
    v = 1; d = '0; d.op = op; d.a = base; d.imm = imm; d.b = sdata; d.trans_id = trans_id_t'(id);
    @(negedge clk);
    v = 0;
  endtask

  task automatic load(input op_t op, input logic [31:0] addr, input logic [31:0] exp, input int id);
    send(op, addr - 4, 4, 0, id);     // in the unit during the previous cycle: result now
    chk(lwb.valid && lwb.trans_id == trans_id_t'(id) && lwb.data == exp,
        $sformatf("%s @%h = %h, expected %h (valid %b)", op.name(), addr, lwb.data, exp, lwb.valid));
    @(negedge clk);
    chk(!lwb.valid, "load write-back lasts one cycle");
  endtask

  initial begin
    v = 0; cs = 0; ds = 0; d = '0;
    for (int i = 0; i < 16; i++) mem[i] = 32'h1111_1111 * i;
    repeat (2) @(posedge clk);
    rst_n = 1;
    load(OP_LW, 32'h8, 32'h2222_2222, 1);
    mem[3] = 32'h80F1_7F82;
    load(OP_LB,  32'hC, 32'hFFFF_FF82, 2);
    load(OP_LBU, 32'hD, 32'h0000_007F, 3);
    load(OP_LH,  32'hE, 32'hFFFF_80F1, 0);
    load(OP_LHU, 32'hE, 32'h0000_80F1, 1);
    // stores: enter the queue, write back, wait for commit
    send(OP_SW, 32'h10, 0, 32'hDEAD_BEEF, 2);
    chk(swb.valid && swb.trans_id == 2, "store write-back one cycle after entering the unit");
    chk(!sqe, "queue holds the store");
    send(OP_SB, 32'h14, 1, 32'h0000_00AB, 3);
    send(OP_SH, 32'h18, 2, 32'h0000_CDEF, 0);
    repeat (3) @(negedge clk);
    chk(mem[4] == 32'h4444_4444 && mem[5] == 32'h5555_5555, "memory unchanged before commit");
    cs = 1; @(negedge clk); cs = 0;
    chk(mem[4] == 32'hDEAD_BEEF, "SW committed");
    ds = 1; @(negedge clk); ds = 0;
    chk(mem[5] == 32'h5555_5555, "discarded SB never written");
    cs = 1; @(negedge clk); cs = 0;
    chk(mem[6] == 32'hCDEF_6666, $sformatf("SH committed: %h", mem[6]));
    chk(sqe, "queue empty");
    load(OP_LW, 32'h10, 32'hDEAD_BEEF, 1);
    // back-to-back loads, one per cycle
    @(negedge clk);
    v = 1; d = '0; d.op = OP_LW; d.a = 32'h10; d.trans_id = 1;
    @(negedge clk);
    chk(lwb.valid && lwb.data == 32'hDEAD_BEEF && lwb.trans_id == 1, "first of two loads");
    d.a = 32'h4; d.trans_id = 2;
    @(negedge clk);
    v = 0;
    chk(lwb.valid && lwb.data == 32'h1111_1111 && lwb.trans_id == 2, "second of two loads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

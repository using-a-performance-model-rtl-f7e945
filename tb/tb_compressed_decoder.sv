// tb_compressed_decoder: every RV32C instruction class with random fields.
// The 16-bit instruction is built with the testbench's c_* encoders and the
// expected expansion with the 32-bit encoders, both from the same random
// register numbers and immediate, so a misplaced immediate bit on either
// side shows up as a mismatch. Also checks reserved and floating-point
// encodings (illegal), and that 32-bit instructions pass through unchanged.
`timescale 1ns/1ps
module tb_compressed_decoder;
  import ss_pkg::*;
  import rv_asm_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] ins, exp_ins;
  logic [31:0] out;
  logic        is_c, ill;
  compressed_decoder dut (.instr_i(ins), .instr_o(out), .is_compressed_o(is_c), .illegal_o(ill));

  task automatic chk(input logic [15:0] c, input logic [31:0] e, input string what);
    ins = {16'($urandom), c};   // upper half must be ignored
    #1;
    checks++;
    if (!is_c || ill || out !== e) begin
      failures++;
      if (failures < 12) $display("%s: c %h -> %h (c %b ill %b), expected %h", what, c, out, is_c, ill, e);
    end
  endtask
  task automatic chk_ill(input logic [15:0] c, input string what);
    ins = {16'h0, c};
    #1;
    checks++;
    if (!is_c || !ill) begin failures++; $display("%s: %h not flagged illegal", what, c); end
  endtask

  initial begin
    for (int n = 0; n < 200; n++) begin
      automatic logic [2:0] p1 = 3'($urandom), p2 = 3'($urandom);
      automatic logic [4:0] r1 = 5'($urandom_range(1, 31)), r2 = 5'($urandom_range(1, 31));
      automatic logic [5:0] i6 = 6'($urandom);
      automatic logic [11:0] s6 = 12'($signed(i6));
      automatic logic [4:0] sh = 5'($urandom);
      automatic logic [9:0] u4 = {$urandom_range(1, 255), 2'b00};
      automatic logic [6:0] uw = {5'($urandom), 2'b00};
      automatic logic [7:0] usp = {6'($urandom), 2'b00};
      automatic logic [9:0] n16 = {$urandom_range(1, 63), 4'b0};
      automatic logic [5:0] nl = (i6 == 0) ? 6'd1 : i6;
      automatic logic [11:0] jo = {11'($urandom), 1'b0};
      automatic logic [8:0] bo = {8'($urandom), 1'b0};
      automatic logic [4:0] x1 = {2'b01, p1}, x2 = {2'b01, p2};
      chk(c_addi4spn(p1, u4), addi(x1, 2, 12'(u4)), "c.addi4spn");
      chk(c_lw(p1, p2, uw), lw(x1, x2, 12'(uw)), "c.lw");
      chk(c_sw(p1, p2, uw), sw(x1, x2, 12'(uw)), "c.sw");
      chk(c_addi(r1, i6), addi(r1, r1, s6), "c.addi");
      chk(c_li(r1, i6), addi(r1, 0, s6), "c.li");
      chk(c_jal_j(1, jo), jal(1, 21'($signed(jo))), "c.jal");
      chk(c_jal_j(0, jo), jal(0, 21'($signed(jo))), "c.j");
      chk(c_addi16sp(n16), addi(2, 2, 12'($signed(n16))), "c.addi16sp");
      if (r1 != 2) chk(c_lui(r1, nl), lui(r1, 20'($signed(nl))), "c.lui");
      chk(c_shift_andi(2'b00, p1, {1'b0, sh}), i_type({7'b0, sh}, x1, 3'b101, x1, 7'b0010011), "c.srli");
      chk(c_shift_andi(2'b01, p1, {1'b0, sh}), i_type({7'b0100000, sh}, x1, 3'b101, x1, 7'b0010011), "c.srai");
      chk(c_shift_andi(2'b10, p1, i6), i_type(s6, x1, 3'b111, x1, 7'b0010011), "c.andi");
      chk(c_arith(2'b00, p1, p2), r_type(7'b0100000, x2, x1, 3'b000, x1, 7'b0110011), "c.sub");
      chk(c_arith(2'b01, p1, p2), r_type(7'b0, x2, x1, 3'b100, x1, 7'b0110011), "c.xor");
      chk(c_arith(2'b10, p1, p2), r_type(7'b0, x2, x1, 3'b110, x1, 7'b0110011), "c.or");
      chk(c_arith(2'b11, p1, p2), r_type(7'b0, x2, x1, 3'b111, x1, 7'b0110011), "c.and");
      chk(c_bz(0, p1, bo), beq(x1, 0, 13'($signed(bo))), "c.beqz");
      chk(c_bz(1, p1, bo), bne(x1, 0, 13'($signed(bo))), "c.bnez");
      chk(c_slli(r1, sh), i_type({7'b0, sh}, r1, 3'b001, r1, 7'b0010011), "c.slli");
      chk(c_lwsp(r1, usp), lw(r1, 2, 12'(usp)), "c.lwsp");
      chk(c_swsp(r1, usp), sw(r1, 2, 12'(usp)), "c.swsp");
      chk(c_jr_mv(r1, 0), jalr(0, r1, 0), "c.jr");
      chk(c_jr_mv(r1, r2), add(r1, 0, r2), "c.mv");
      chk(c_jalr_add(r1, 0), jalr(1, r1, 0), "c.jalr");
      chk(c_jalr_add(r1, r2), add(r1, r1, r2), "c.add");
    end
    chk_ill(16'h0000, "all-zero");
    chk_ill(c_addi16sp(10'd0), "c.addi16sp zero");
    chk_ill(c_lui(5'd5, 6'd0), "c.lui zero");
    chk_ill(c_lwsp(5'd0, 8'd4), "c.lwsp x0");
    chk_ill(c_jr_mv(5'd0, 5'd0), "c.jr x0");
    chk_ill(c_jalr_add(5'd0, 5'd0), "c.ebreak");
    chk_ill(16'h2000, "c.fld");
    chk_ill(16'he002, "c.fswsp");
    chk_ill(16'h9c01, "c.subw");
    chk_ill(16'h9005, "c.srli shamt[5]");
    // 32-bit instructions are not touched
    for (int n = 0; n < 50; n++) begin
      ins = {$urandom} | 32'h3;
      #1;
      checks++;
      if (is_c || ill || out !== ins) begin failures++; $display("32-bit %h changed to %h", ins, out); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

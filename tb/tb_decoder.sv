// tb_decoder: directed instructions of every class, encoded with the
// testbench assembler; checks unit, operation, registers, operand selection
// and immediate, plus the illegal-instruction path (division, CSR access,
// unused bit-manipulation encodings). Every Zba/Zbb/Zbc/Zbs encoding is
// checked once.
`timescale 1ns/1ps
module tb_decoder;
  import ss_pkg::*;
  import rv_asm_pkg::*;
  int checks = 0, failures = 0;
  fetch_entry_t f; instr_t d;
  logic c_ill = 1'b0;
  decoder dut (.fetch_i(f), .is_compressed_i(1'b0), .c_illegal_i(c_ill), .instr_o(d));

  task automatic chk(input logic [31:0] ins, input fu_t fu, input op_t op, input int rs1, rs2, rd,
                     input logic use_imm, use_pc, input logic [31:0] imm, input logic ill = 0);
    f = '{pc: 32'h100, instr: ins, bp_taken: 1'b1, bp_target: 32'h40};
    #1;
    checks++;
    if (d.fu !== fu || d.op !== op || d.rs1 !== 5'(rs1) || d.rs2 !== 5'(rs2) || d.rd !== 5'(rd) ||
        d.use_imm !== use_imm || d.use_pc !== use_pc || (use_imm && d.imm !== imm) ||
        d.illegal !== ill || d.pc !== 32'h100 || !d.bp_taken || d.bp_target !== 32'h40 ||
        d.use_rs1 !== (rs1 != 0) || d.use_rs2 !== (rs2 != 0)) begin
      failures++;
      $display("instr %h: fu %s op %s rs %0d %0d rd %0d imm %h use_imm %b ill %b", ins, d.fu.name(),
               d.op.name(), d.rs1, d.rs2, d.rd, d.imm, d.use_imm, d.illegal);
    end
  endtask

  initial begin
    chk(addi(5, 6, -12'sd3), FU_ALU, OP_ADD, 6, 0, 5, 1, 0, -32'sd3);
    chk(add(7, 8, 9), FU_ALU, OP_ADD, 8, 9, 7, 0, 0, 0);
    chk(r_type(7'b0100000, 2, 3, 3'b000, 4, 7'b0110011), FU_ALU, OP_SUB, 3, 2, 4, 0, 0, 0);
    chk(r_type(7'b0100000, 2, 3, 3'b101, 4, 7'b0110011), FU_ALU, OP_SRA, 3, 2, 4, 0, 0, 0);
    chk(i_type(12'h405, 3, 3'b101, 4, 7'b0010011), FU_ALU, OP_SRA, 3, 0, 4, 1, 0, 32'h405);
    chk(i_type(12'h005, 3, 3'b001, 4, 7'b0010011), FU_ALU, OP_SLL, 3, 0, 4, 1, 0, 32'h5);
    chk(i_type(12'hfff, 3, 3'b011, 4, 7'b0010011), FU_ALU, OP_SLTU, 3, 0, 4, 1, 0, 32'hffff_ffff);
    chk(r_type(7'b0, 2, 3, 3'b111, 4, 7'b0110011), FU_ALU, OP_AND, 3, 2, 4, 0, 0, 0);
    chk(lui(10, 20'hABCDE), FU_ALU, OP_ADD, 0, 0, 10, 1, 0, 32'hABCDE000);
    chk(auipc(11, 20'h00012), FU_ALU, OP_ADD, 0, 0, 11, 1, 1, 32'h00012000);
    chk(jal(1, 21'h1FFFF0), FU_BRANCH, OP_JAL, 0, 0, 1, 0, 0, 0);
    checks++; if (d.imm !== 32'hFFFF_FFF0) begin failures++; $display("jal imm %h", d.imm); end
    chk(jalr(0, 1, 12'd8), FU_BRANCH, OP_JALR, 1, 0, 0, 0, 0, 0);
    chk(bne(3, 4, -13'sd8), FU_BRANCH, OP_BNE, 3, 4, 0, 0, 0, 0);
    checks++; if (d.imm !== -32'sd8) begin failures++; $display("bne imm %h", d.imm); end
    chk(b_type(13'd16, 4, 3, 3'b111), FU_BRANCH, OP_BGEU, 3, 4, 0, 0, 0, 0);
    chk(lw(5, 1, 12'd12), FU_LOAD, OP_LW, 1, 0, 5, 0, 0, 0);
    checks++; if (d.imm !== 32'd12) begin failures++; $display("lw imm %h", d.imm); end
    chk(i_type(12'd3, 1, 3'b100, 5, 7'b0000011), FU_LOAD, OP_LBU, 1, 0, 5, 0, 0, 0);
    chk(sw(6, 1, -12'sd4), FU_STORE, OP_SW, 1, 6, 0, 0, 0, 0);
    checks++; if (d.imm !== -32'sd4) begin failures++; $display("sw imm %h", d.imm); end
    chk(s_type(12'd1, 6, 1, 3'b000), FU_STORE, OP_SB, 1, 6, 0, 0, 0, 0);
    chk(mul(12, 13, 14), FU_MULT, OP_MUL, 13, 14, 12, 0, 0, 0);
    chk(r_type(7'b0000001, 14, 13, 3'b011, 12, 7'b0110011), FU_MULT, OP_MULHU, 13, 14, 12, 0, 0, 0);
    // Zba/Zbb/Zbc/Zbs register-register forms
    begin
      struct {logic [6:0] f7; logic [2:0] f3; fu_t fu; op_t op;} rr[27] = '{
        '{7'b0010000, 3'b010, FU_ALU, OP_SH1ADD}, '{7'b0010000, 3'b100, FU_ALU, OP_SH2ADD},
        '{7'b0010000, 3'b110, FU_ALU, OP_SH3ADD}, '{7'b0100000, 3'b111, FU_ALU, OP_ANDN},
        '{7'b0100000, 3'b110, FU_ALU, OP_ORN},    '{7'b0100000, 3'b100, FU_ALU, OP_XNOR},
        '{7'b0000101, 3'b110, FU_ALU, OP_MAX},    '{7'b0000101, 3'b111, FU_ALU, OP_MAXU},
        '{7'b0000101, 3'b100, FU_ALU, OP_MIN},    '{7'b0000101, 3'b101, FU_ALU, OP_MINU},
        '{7'b0110000, 3'b001, FU_ALU, OP_ROL},    '{7'b0110000, 3'b101, FU_ALU, OP_ROR},
        '{7'b0100100, 3'b001, FU_ALU, OP_BCLR},   '{7'b0100100, 3'b101, FU_ALU, OP_BEXT},
        '{7'b0110100, 3'b001, FU_ALU, OP_BINV},   '{7'b0010100, 3'b001, FU_ALU, OP_BSET},
        '{7'b0000101, 3'b001, FU_MULT, OP_CLMUL}, '{7'b0000101, 3'b011, FU_MULT, OP_CLMULH},
        '{7'b0000101, 3'b010, FU_MULT, OP_CLMULR},
        '{7'b0000000, 3'b000, FU_ALU, OP_ADD}, '{7'b0000000, 3'b000, FU_ALU, OP_ADD},
        '{7'b0000000, 3'b000, FU_ALU, OP_ADD}, '{7'b0000000, 3'b000, FU_ALU, OP_ADD},
        '{7'b0000000, 3'b000, FU_ALU, OP_ADD}, '{7'b0000000, 3'b000, FU_ALU, OP_ADD},
        '{7'b0000000, 3'b000, FU_ALU, OP_ADD}, '{7'b0000000, 3'b000, FU_ALU, OP_ADD}};
      for (int k = 0; k < 19; k++)
        chk(r_type(rr[k].f7, 9, 17, rr[k].f3, 21, 7'b0110011), rr[k].fu, rr[k].op, 17, 9, 21, 0, 0, 0);
    end
    // zext.h (rs2 field 0), and the same encoding with rs2 != 0 is illegal
    chk(r_type(7'b0000100, 0, 17, 3'b100, 21, 7'b0110011), FU_ALU, OP_ZEXTH, 17, 0, 21, 0, 0, 0);
    chk(r_type(7'b0000100, 3, 17, 3'b100, 21, 7'b0110011), FU_ALU, OP_ADD, 0, 0, 0, 0, 0, 0, 1);
    // unary and immediate forms
    chk(i_type(12'h600, 17, 3'b001, 21, 7'b0010011), FU_ALU, OP_CLZ,   17, 0, 21, 1, 0, 32'h600);
    chk(i_type(12'h601, 17, 3'b001, 21, 7'b0010011), FU_ALU, OP_CTZ,   17, 0, 21, 1, 0, 32'h601);
    chk(i_type(12'h602, 17, 3'b001, 21, 7'b0010011), FU_ALU, OP_CPOP,  17, 0, 21, 1, 0, 32'h602);
    chk(i_type(12'h604, 17, 3'b001, 21, 7'b0010011), FU_ALU, OP_SEXTB, 17, 0, 21, 1, 0, 32'h604);
    chk(i_type(12'h605, 17, 3'b001, 21, 7'b0010011), FU_ALU, OP_SEXTH, 17, 0, 21, 1, 0, 32'h605);
    chk(i_type(12'h48b, 17, 3'b001, 21, 7'b0010011), FU_ALU, OP_BCLR,  17, 0, 21, 1, 0, 32'h48b);
    chk(i_type(12'h68b, 17, 3'b001, 21, 7'b0010011), FU_ALU, OP_BINV,  17, 0, 21, 1, 0, 32'h68b);
    chk(i_type(12'h28b, 17, 3'b001, 21, 7'b0010011), FU_ALU, OP_BSET,  17, 0, 21, 1, 0, 32'h28b);
    chk(i_type(12'h60b, 17, 3'b101, 21, 7'b0010011), FU_ALU, OP_ROR,   17, 0, 21, 1, 0, 32'h60b);
    chk(i_type(12'h48b, 17, 3'b101, 21, 7'b0010011), FU_ALU, OP_BEXT,  17, 0, 21, 1, 0, 32'h48b);
    chk(i_type(12'h287, 17, 3'b101, 21, 7'b0010011), FU_ALU, OP_ORCB,  17, 0, 21, 1, 0, 32'h287);
    chk(i_type(12'h698, 17, 3'b101, 21, 7'b0010011), FU_ALU, OP_REV8,  17, 0, 21, 1, 0, 32'h698);
    chk(i_type(12'h603, 17, 3'b001, 21, 7'b0010011), FU_ALU, OP_ADD, 0, 0, 0, 0, 0, 0, 1);
    chk(i_type(12'h200, 17, 3'b001, 21, 7'b0010011), FU_ALU, OP_ADD, 0, 0, 0, 0, 0, 0, 1);
    // division and CSR accesses are not built: a no-op that writes nothing
    chk(r_type(7'b0000001, 14, 13, 3'b100, 12, 7'b0110011), FU_ALU, OP_ADD, 0, 0, 0, 0, 0, 0, 1);
    chk(32'h3000_2573, FU_ALU, OP_ADD, 0, 0, 0, 0, 0, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

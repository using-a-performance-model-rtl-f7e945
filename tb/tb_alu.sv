// tb_alu: random operands for every ALU operation, base and Zba/Zbb/Zbs,
// compared with a reference written with 64-bit integer arithmetic and
// bit-by-bit loops; the write-back carries valid and trans_id through in the
// same cycle. Operands with few set bits are mixed in so that clz/ctz/cpop
// and the single-bit operations see edge values.
`timescale 1ns/1ps
module tb_alu;
  import ss_pkg::*;
  int checks = 0, failures = 0;
  logic v; fu_data_t d; wb_t wb;
  alu dut (.valid_i(v), .data_i(d), .wb_o(wb));

  function automatic logic [31:0] ref_alu(input op_t op, input logic [31:0] a, b);
    longint sa = longint'($signed(a)), sb = longint'($signed(b));
    case (op)
      OP_ADD:  return 32'(a + b);
      OP_SUB:  return 32'(longint'(a) - longint'(b));
      OP_SLL:  return 32'(64'(a) << b[4:0]);
      OP_SLT:  return (sa < sb) ? 1 : 0;
      OP_SLTU: return (longint'(a) < longint'(b)) ? 1 : 0;
      OP_XOR:  return a ^ b;
      OP_SRL:  return 32'(64'(a) >> b[4:0]);
      OP_SRA:  return 32'(sa >>> b[4:0]);
      OP_OR:   return a | b;
      OP_AND:  return a & b;
      OP_SH1ADD: return 32'(longint'(a) * 2 + longint'(b));
      OP_SH2ADD: return 32'(longint'(a) * 4 + longint'(b));
      OP_SH3ADD: return 32'(longint'(a) * 8 + longint'(b));
      OP_ANDN: return a & ~b;
      OP_ORN:  return a | ~b;
      OP_XNOR: return ~(a ^ b);
      OP_CLZ:  begin int n = 0; while (n < 32 && !a[31-n]) n++; return n; end
      OP_CTZ:  begin int n = 0; while (n < 32 && !a[n]) n++; return n; end
      OP_CPOP: begin int n = 0; for (int i = 0; i < 32; i++) n += a[i]; return n; end
      OP_MAX:  return (sa > sb) ? a : b;
      OP_MAXU: return (longint'(a) > longint'(b)) ? a : b;
      OP_MIN:  return (sa < sb) ? a : b;
      OP_MINU: return (longint'(a) < longint'(b)) ? a : b;
      OP_SEXTB: return 32'(longint'($signed(a[7:0])));
      OP_SEXTH: return 32'(longint'($signed(a[15:0])));
      OP_ZEXTH: return {16'b0, a[15:0]};
      OP_ROL:  begin logic [31:0] r = a; repeat (b[4:0]) r = {r[30:0], r[31]}; return r; end
      OP_ROR:  begin logic [31:0] r = a; repeat (b[4:0]) r = {r[0], r[31:1]}; return r; end
      OP_ORCB: begin logic [31:0] r; for (int i = 0; i < 4; i++) r[8*i +: 8] = (a[8*i +: 8] != 0) ? 8'hff : 8'h00; return r; end
      OP_REV8: return {a[7:0], a[15:8], a[23:16], a[31:24]};
      OP_BCLR: begin logic [31:0] r = a; r[b[4:0]] = 1'b0; return r; end
      OP_BEXT: return {31'b0, a[b[4:0]]};
      OP_BINV: begin logic [31:0] r = a; r[b[4:0]] = ~r[b[4:0]]; return r; end
      OP_BSET: begin logic [31:0] r = a; r[b[4:0]] = 1'b1; return r; end
      default: return 32'hdead_beef;
    endcase
  endfunction

  initial begin
    op_t ops[34] = '{OP_ADD, OP_SUB, OP_SLL, OP_SLT, OP_SLTU, OP_XOR, OP_SRL, OP_SRA, OP_OR, OP_AND,
                     OP_SH1ADD, OP_SH2ADD, OP_SH3ADD, OP_ANDN, OP_ORN, OP_XNOR, OP_CLZ, OP_CTZ,
                     OP_CPOP, OP_MAX, OP_MAXU, OP_MIN, OP_MINU, OP_SEXTB, OP_SEXTH, OP_ZEXTH,
                     OP_ROL, OP_ROR, OP_ORCB, OP_REV8, OP_BCLR, OP_BEXT, OP_BINV, OP_BSET};
    for (int i = 0; i < 6800; i++) begin
      d = '0;
      d.op = ops[i % 34];
      d.a = $urandom; d.b = (i % 7 == 0) ? d.a : $urandom;
      if (i % 13 == 0) d.a = 32'h8000_0000;
      if (i % 11 == 0) d.a = d.a >> $urandom_range(0, 31);
      if (i % 17 == 0) d.a = d.a & ($urandom << $urandom_range(0, 31)) & 32'h00ff_00ff;
      if (i % 19 == 0) d.a = '0;
      d.trans_id = trans_id_t'($urandom);
      v = 1'($urandom);
      #1;
      checks++;
      if (wb.data !== ref_alu(d.op, d.a, d.b) || wb.valid !== v || wb.trans_id !== d.trans_id) begin
        failures++;
        if (failures < 10) $display("op %s a %h b %h got %h exp %h", d.op.name(), d.a, d.b, wb.data,
                                    ref_alu(d.op, d.a, d.b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_branch_unit: random branches and jumps with random predictions. Checks
// the resolved next pc, the mispredict flag (outcome or target differs from
// the prediction), the link value (pc+2 after a compressed jump), and that a cancelled branch never reports
// a mispredict.
`timescale 1ns/1ps
module tb_branch_unit;
  import ss_pkg::*;
  int checks = 0, failures = 0, n_mis = 0;
  logic v, canc; fu_data_t d; wb_t wb; bres_t br;
  branch_unit dut (.valid_i(v), .data_i(d), .cancelled_i(canc), .wb_o(wb), .bres_o(br));

  initial begin
    op_t ops[8] = '{OP_BEQ, OP_BNE, OP_BLT, OP_BGE, OP_BLTU, OP_BGEU, OP_JAL, OP_JALR};
    for (int i = 0; i < 4000; i++) begin
      logic tk, emis; logic [31:0] tgt, nxt;
      d = '0;
      d.op = ops[i % 8];
      d.a = $urandom_range(0, 3) == 0 ? 32'hffff_fff0 : $urandom_range(0, 7);
      d.b = $urandom_range(0, 3) == 0 ? 32'h0000_0004 : $urandom_range(0, 7);
      d.pc = {$urandom_range(0, 2047), 1'b0};
      d.rvc = 1'($urandom);
      d.imm = 32'($signed(12'($urandom)) & -2);
      d.trans_id = trans_id_t'($urandom);
      case (d.op)
        OP_BEQ:  tk = d.a == d.b;
        OP_BNE:  tk = d.a != d.b;
        OP_BLT:  tk = int'(d.a) < int'(d.b);
        OP_BGE:  tk = int'(d.a) >= int'(d.b);
        OP_BLTU: tk = longint'(d.a) < longint'(d.b);
        OP_BGEU: tk = longint'(d.a) >= longint'(d.b);
        default: tk = 1;
      endcase
      tgt = (d.op == OP_JALR) ? ((d.a + d.imm) & 32'hffff_fffe) : d.pc + d.imm;
      nxt = tk ? tgt : d.pc + (d.rvc ? 2 : 4);
      d.bp_taken = 1'($urandom);
      d.bp_target = ($urandom_range(0, 1) == 0) ? tgt : tgt + 4;
      v = ($urandom_range(0, 7) != 0);
      canc = ($urandom_range(0, 5) == 0);
      emis = v && !canc && ((tk != d.bp_taken) || (tk && tgt != d.bp_target));
      #1;
      checks++;
      if (br.valid !== v || br.mispredict !== emis || br.target !== nxt || br.trans_id !== d.trans_id ||
          wb.valid !== v || wb.data !== d.pc + (d.rvc ? 2 : 4)) begin
        failures++;
        if (failures < 10) $display("%s a=%h b=%h: mis %b (exp %b) target %h (exp %h)",
                                    d.op.name(), d.a, d.b, br.mispredict, emis, br.target, nxt);
      end
      n_mis += int'(emis);
    end
    checks++;
    if (n_mis == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

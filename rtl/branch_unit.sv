// branch_unit: resolves conditional branches, JAL and JALR.
//
// In the cycle after issue it computes the outcome and the target, compares
// them with the frontend's prediction carried with the instruction, and
// reports a mispredict together with the scoreboard index (trans_id) of the
// branch and the correct next pc. Jumps write the next sequential pc (pc+4,
// or pc+2 for a compressed jump) to their destination register through the
// fixed-latency write-back port. A branch whose
// scoreboard entry is already cancelled never reports a mispredict.
// One-cycle latency, combinational.
module branch_unit
  import ss_pkg::*;
(
  input  logic     valid_i,
  input  fu_data_t data_i,
  input  logic     cancelled_i,  // the entry of this branch is cancelled
  output wb_t      wb_o,
  output bres_t    bres_o
);
  logic  taken;
  xlen_t target, next_pc, seq_pc;
  always_comb begin
    unique case (data_i.op)
      OP_BEQ:  taken = data_i.a == data_i.b;
      OP_BNE:  taken = data_i.a != data_i.b;
      OP_BLT:  taken = $signed(data_i.a) <  $signed(data_i.b);
      OP_BGE:  taken = $signed(data_i.a) >= $signed(data_i.b);
      OP_BLTU: taken = data_i.a <  data_i.b;
      OP_BGEU: taken = data_i.a >= data_i.b;
      OP_JAL, OP_JALR: taken = 1'b1;
      default: taken = 1'b0;
    endcase
    target  = (data_i.op == OP_JALR) ? ((data_i.a + data_i.imm) & ~xlen_t'(1))
                                     : (data_i.pc + data_i.imm);
    seq_pc  = data_i.pc + (data_i.rvc ? xlen_t'(2) : xlen_t'(4));
    next_pc = taken ? target : seq_pc;
  end

  assign wb_o   = '{valid: valid_i, trans_id: data_i.trans_id, data: seq_pc};
  assign bres_o = '{valid: valid_i,
                    mispredict: valid_i && !cancelled_i &&
                                ((taken != data_i.bp_taken) ||
                                 (taken && target != data_i.bp_target)),
                    trans_id: data_i.trans_id,
                    target: next_pc};
endmodule

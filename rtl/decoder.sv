// decoder: decodes one 32-bit RV32IM instruction, including the Zba, Zbb,
// Zbc and Zbs bit-manipulation extensions, into an issue-buffer entry.
//
// It selects the functional-unit class and operation, the source and
// destination registers and the immediate, and how the operands are formed
// (register, immediate, pc). LUI is an addition to x0, AUIPC an addition to
// the pc; JAL and JALR go to the branch unit, which writes the link value.
// Carry-less multiplications go to the multiplier, the other bit-manipulation
// instructions to the ALU. FENCE is decoded as a no-op on the ALU. Anything
// else (system instructions, CSRs, atomics, division, floating point) is
// flagged illegal and issued as a no-op. The frontend's prediction is carried along.
// A compressed instruction arrives already expanded by the compressed
// decoder in front of this one: is_compressed_i marks it (so that jumps link
// and branches fall through to pc+2) and c_illegal_i turns it into a no-op.
// Combinational; the dual-issue core has two of them.
module decoder
  import ss_pkg::*;
(
  input  fetch_entry_t fetch_i,
  input  logic         is_compressed_i,
  input  logic         c_illegal_i,
  output instr_t       instr_o
);
  logic [31:0] ins;
  logic [6:0]  opc;
  logic [2:0]  f3;
  logic [6:0]  f7;
  xlen_t imm_i, imm_s, imm_b, imm_u, imm_j;

  assign ins   = fetch_i.instr;
  assign opc   = ins[6:0];
  assign f3    = ins[14:12];
  assign f7    = ins[31:25];
  assign imm_i = {{20{ins[31]}}, ins[31:20]};
  assign imm_s = {{20{ins[31]}}, ins[31:25], ins[11:7]};
  assign imm_b = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
  assign imm_u = {ins[31:12], 12'b0};
  assign imm_j = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};

  always_comb begin
    instr_o           = '0;
    instr_o.pc        = fetch_i.pc;
    instr_o.bp_taken  = fetch_i.bp_taken;
    instr_o.bp_target = fetch_i.bp_target;
    instr_o.rvc       = is_compressed_i;
    instr_o.rs1       = ins[19:15];
    instr_o.rs2       = ins[24:20];
    instr_o.rd        = ins[11:7];
    instr_o.fu        = FU_ALU;
    instr_o.op        = OP_ADD;
    unique case (opc)
      7'b0110111: begin // LUI
        instr_o.rs1 = '0; instr_o.use_imm = 1'b1; instr_o.imm = imm_u;
      end
      7'b0010111: begin // AUIPC
        instr_o.rs1 = '0; instr_o.use_pc = 1'b1; instr_o.use_imm = 1'b1; instr_o.imm = imm_u;
      end
      7'b1101111: begin // JAL
        instr_o.fu = FU_BRANCH; instr_o.op = OP_JAL; instr_o.rs1 = '0; instr_o.imm = imm_j;
      end
      7'b1100111: begin // JALR
        instr_o.fu = FU_BRANCH; instr_o.op = OP_JALR; instr_o.use_rs1 = 1'b1; instr_o.imm = imm_i;
        instr_o.illegal = (f3 != 3'b000);
      end
      7'b1100011: begin // branches
        instr_o.fu = FU_BRANCH; instr_o.use_rs1 = 1'b1; instr_o.use_rs2 = 1'b1;
        instr_o.rd = '0; instr_o.imm = imm_b;
        unique case (f3)
          3'b000: instr_o.op = OP_BEQ;
          3'b001: instr_o.op = OP_BNE;
          3'b100: instr_o.op = OP_BLT;
          3'b101: instr_o.op = OP_BGE;
          3'b110: instr_o.op = OP_BLTU;
          3'b111: instr_o.op = OP_BGEU;
          default: instr_o.illegal = 1'b1;
        endcase
      end
      7'b0000011: begin // loads
        instr_o.fu = FU_LOAD; instr_o.use_rs1 = 1'b1; instr_o.imm = imm_i;
        unique case (f3)
          3'b000: instr_o.op = OP_LB;
          3'b001: instr_o.op = OP_LH;
          3'b010: instr_o.op = OP_LW;
          3'b100: instr_o.op = OP_LBU;
          3'b101: instr_o.op = OP_LHU;
          default: instr_o.illegal = 1'b1;
        endcase
      end
      7'b0100011: begin // stores
        instr_o.fu = FU_STORE; instr_o.use_rs1 = 1'b1; instr_o.use_rs2 = 1'b1;
        instr_o.rd = '0; instr_o.imm = imm_s;
        unique case (f3)
          3'b000: instr_o.op = OP_SB;
          3'b001: instr_o.op = OP_SH;
          3'b010: instr_o.op = OP_SW;
          default: instr_o.illegal = 1'b1;
        endcase
      end
      7'b0010011: begin // OP-IMM
        instr_o.use_rs1 = 1'b1; instr_o.use_imm = 1'b1; instr_o.imm = imm_i;
        unique case (f3)
          3'b000: instr_o.op = OP_ADD;
          3'b010: instr_o.op = OP_SLT;
          3'b011: instr_o.op = OP_SLTU;
          3'b100: instr_o.op = OP_XOR;
          3'b110: instr_o.op = OP_OR;
          3'b111: instr_o.op = OP_AND;
          3'b001: begin
            unique casez (ins[31:20])
              12'b0000000?????: instr_o.op = OP_SLL;
              12'b0100100?????: instr_o.op = OP_BCLR;
              12'b0110100?????: instr_o.op = OP_BINV;
              12'b0010100?????: instr_o.op = OP_BSET;
              12'h600:          instr_o.op = OP_CLZ;
              12'h601:          instr_o.op = OP_CTZ;
              12'h602:          instr_o.op = OP_CPOP;
              12'h604:          instr_o.op = OP_SEXTB;
              12'h605:          instr_o.op = OP_SEXTH;
              default:          instr_o.illegal = 1'b1;
            endcase
          end
          default: begin // 3'b101
            unique casez (ins[31:20])
              12'b0000000?????: instr_o.op = OP_SRL;
              12'b0100000?????: instr_o.op = OP_SRA;
              12'b0110000?????: instr_o.op = OP_ROR;
              12'b0100100?????: instr_o.op = OP_BEXT;
              12'h287:          instr_o.op = OP_ORCB;
              12'h698:          instr_o.op = OP_REV8;
              default:          instr_o.illegal = 1'b1;
            endcase
          end
        endcase
      end
      7'b0110011: begin // OP
        instr_o.use_rs1 = 1'b1; instr_o.use_rs2 = 1'b1;
        unique case ({f7, f3})
          {7'b0000000, 3'b000}: instr_o.op = OP_ADD;
          {7'b0100000, 3'b000}: instr_o.op = OP_SUB;
          {7'b0000000, 3'b001}: instr_o.op = OP_SLL;
          {7'b0000000, 3'b010}: instr_o.op = OP_SLT;
          {7'b0000000, 3'b011}: instr_o.op = OP_SLTU;
          {7'b0000000, 3'b100}: instr_o.op = OP_XOR;
          {7'b0000000, 3'b101}: instr_o.op = OP_SRL;
          {7'b0100000, 3'b101}: instr_o.op = OP_SRA;
          {7'b0000000, 3'b110}: instr_o.op = OP_OR;
          {7'b0000000, 3'b111}: instr_o.op = OP_AND;
          {7'b0000001, 3'b000}: begin instr_o.fu = FU_MULT; instr_o.op = OP_MUL;    end
          {7'b0000001, 3'b001}: begin instr_o.fu = FU_MULT; instr_o.op = OP_MULH;   end
          {7'b0000001, 3'b010}: begin instr_o.fu = FU_MULT; instr_o.op = OP_MULHSU; end
          {7'b0000001, 3'b011}: begin instr_o.fu = FU_MULT; instr_o.op = OP_MULHU;  end
          {7'b0000101, 3'b001}: begin instr_o.fu = FU_MULT; instr_o.op = OP_CLMUL;  end
          {7'b0000101, 3'b010}: begin instr_o.fu = FU_MULT; instr_o.op = OP_CLMULR; end
          {7'b0000101, 3'b011}: begin instr_o.fu = FU_MULT; instr_o.op = OP_CLMULH; end
          {7'b0010000, 3'b010}: instr_o.op = OP_SH1ADD;
          {7'b0010000, 3'b100}: instr_o.op = OP_SH2ADD;
          {7'b0010000, 3'b110}: instr_o.op = OP_SH3ADD;
          {7'b0100000, 3'b111}: instr_o.op = OP_ANDN;
          {7'b0100000, 3'b110}: instr_o.op = OP_ORN;
          {7'b0100000, 3'b100}: instr_o.op = OP_XNOR;
          {7'b0000101, 3'b110}: instr_o.op = OP_MAX;
          {7'b0000101, 3'b111}: instr_o.op = OP_MAXU;
          {7'b0000101, 3'b100}: instr_o.op = OP_MIN;
          {7'b0000101, 3'b101}: instr_o.op = OP_MINU;
          {7'b0110000, 3'b001}: instr_o.op = OP_ROL;
          {7'b0110000, 3'b101}: instr_o.op = OP_ROR;
          {7'b0100100, 3'b001}: instr_o.op = OP_BCLR;
          {7'b0100100, 3'b101}: instr_o.op = OP_BEXT;
          {7'b0110100, 3'b001}: instr_o.op = OP_BINV;
          {7'b0010100, 3'b001}: instr_o.op = OP_BSET;
          {7'b0000100, 3'b100}: begin  // zext.h
            instr_o.op = OP_ZEXTH; instr_o.illegal = (instr_o.rs2 != 5'd0); instr_o.use_rs2 = 1'b0;
          end
          default: instr_o.illegal = 1'b1;   // includes division, not built
        endcase
      end
      7'b0001111: begin // FENCE: no-op
        instr_o.rd = '0; instr_o.rs1 = '0;
      end
      default: instr_o.illegal = 1'b1;
    endcase
    if (c_illegal_i) instr_o.illegal = 1'b1;
    if (instr_o.illegal) begin
      // issued as a no-op that writes nothing
      instr_o.fu = FU_ALU; instr_o.op = OP_ADD; instr_o.rd = '0;
      instr_o.use_rs1 = 1'b0; instr_o.use_rs2 = 1'b0; instr_o.use_imm = 1'b0;
    end
    if (!instr_o.use_rs1) instr_o.rs1 = '0;
    if (!instr_o.use_rs2) instr_o.rs2 = '0;
  end
endmodule

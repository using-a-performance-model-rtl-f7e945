// compressed_decoder: expands one RV32C (16-bit) instruction into the 32-bit
// instruction it stands for, so that the ordinary decoder can handle it.
//
// Interface: instr_i holds a 32-bit instruction, or a compressed one in its
// low 16 bits (upper half ignored), as the frontend's re-aligner delivers
// it. If instr_i[1:0] != 2'b11 the instruction is compressed:
// is_compressed_o is set and instr_o is the equivalent 32-bit encoding.
// Otherwise instr_i passes through unchanged. illegal_o flags reserved
// encodings and the compressed floating-point loads and stores (there is no
// FPU here), plus C.EBREAK (no system instructions are built). Purely
// combinational.
//
// From the paper: the decode stage has one compressed decoder in front of
// each decoder, duplicated for two-way decode. The expansion table is the
// RISC-V C extension's, for RV32; this block is written from scratch, not
// taken from CVA6.
module compressed_decoder
  import ss_pkg::*;
(
  input  logic [ILEN-1:0] instr_i,
  output logic [ILEN-1:0] instr_o,
  output logic            is_compressed_o,
  output logic            illegal_o
);
  localparam logic [6:0] OPC_LOAD = 7'b0000011, OPC_STORE = 7'b0100011, OPC_OPIMM = 7'b0010011,
                         OPC_OP = 7'b0110011, OPC_LUI = 7'b0110111, OPC_JAL = 7'b1101111,
                         OPC_JALR = 7'b1100111, OPC_BRANCH = 7'b1100011;

  function automatic logic [31:0] enc_i(logic [11:0] imm, logic [4:0] rs1, logic [2:0] f3,
                                        logic [4:0] rd, logic [6:0] opc);
    return {imm, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] enc_r(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3, logic [4:0] rd);
    return {f7, rs2, rs1, f3, rd, OPC_OP};
  endfunction
  function automatic logic [31:0] enc_s(logic [11:0] imm, logic [4:0] rs2, logic [4:0] rs1);
    return {imm[11:5], rs2, rs1, 3'b010, imm[4:0], OPC_STORE};
  endfunction
  function automatic logic [31:0] enc_b(logic [12:0] off, logic [4:0] rs1, logic [2:0] f3);
    return {off[12], off[10:5], 5'd0, rs1, f3, off[4:1], off[11], OPC_BRANCH};
  endfunction
  function automatic logic [31:0] enc_j(logic [20:0] off, logic [4:0] rd);
    return {off[20], off[10:1], off[11], off[19:12], rd, OPC_JAL};
  endfunction

  logic [15:0] c;
  logic [4:0]  rd, rs2, rdp, rs1p, rs2p;
  logic [11:0] imm6;     // sign-extended 6-bit immediate
  logic [20:0] joff;     // C.J / C.JAL offset
  logic [12:0] boff;     // C.BEQZ / C.BNEZ offset

  always_comb begin
    c    = instr_i[15:0];
    rd   = c[11:7];
    rs2  = c[6:2];
    rdp  = {2'b01, c[4:2]};
    rs1p = {2'b01, c[9:7]};
    rs2p = {2'b01, c[4:2]};
    imm6 = {{6{c[12]}}, c[12], c[6:2]};
    joff = {{9{c[12]}}, c[12], c[8], c[10:9], c[6], c[7], c[2], c[11], c[5:3], 1'b0};
    boff = {{4{c[12]}}, c[12], c[6:5], c[2], c[11:10], c[4:3], 1'b0};

    instr_o         = instr_i;
    is_compressed_o = (instr_i[1:0] != 2'b11);
    illegal_o       = 1'b0;

    unique case (instr_i[1:0])
      2'b00: begin
        unique case (c[15:13])
          3'b000: begin // C.ADDI4SPN
            instr_o   = enc_i({2'b0, c[10:7], c[12:11], c[5], c[6], 2'b00}, 5'd2, 3'b000, rdp, OPC_OPIMM);
            illegal_o = (c[12:5] == 8'd0);
          end
          3'b010: instr_o = enc_i({5'b0, c[5], c[12:10], c[6], 2'b00}, rs1p, 3'b010, rdp, OPC_LOAD); // C.LW
          3'b110: instr_o = enc_s({5'b0, c[5], c[12:10], c[6], 2'b00}, rs2p, rs1p);                  // C.SW
          default: illegal_o = 1'b1;  // floating-point loads/stores, reserved
        endcase
      end
      2'b01: begin
        unique case (c[15:13])
          3'b000: instr_o = enc_i(imm6, rd, 3'b000, rd, OPC_OPIMM);          // C.ADDI / C.NOP
          3'b001: instr_o = enc_j(joff, 5'd1);                               // C.JAL
          3'b010: instr_o = enc_i(imm6, 5'd0, 3'b000, rd, OPC_OPIMM);        // C.LI
          3'b011: begin
            if (rd == 5'd2) begin                                            // C.ADDI16SP
              instr_o   = enc_i({{3{c[12]}}, c[4:3], c[5], c[2], c[6], 4'b0}, 5'd2, 3'b000, 5'd2,
                                OPC_OPIMM);
              illegal_o = ({c[12], c[6:2]} == 6'd0);
            end else begin                                                   // C.LUI
              instr_o   = {{15{c[12]}}, c[6:2], rd, OPC_LUI};
              illegal_o = ({c[12], c[6:2]} == 6'd0);
            end
          end
          3'b100: begin
            unique case (c[11:10])
              2'b00: begin                                                   // C.SRLI
                instr_o = enc_i({7'b0000000, c[6:2]}, rs1p, 3'b101, rs1p, OPC_OPIMM);
                illegal_o = c[12];
              end
              2'b01: begin                                                   // C.SRAI
                instr_o = enc_i({7'b0100000, c[6:2]}, rs1p, 3'b101, rs1p, OPC_OPIMM);
                illegal_o = c[12];
              end
              2'b10: instr_o = enc_i(imm6, rs1p, 3'b111, rs1p, OPC_OPIMM);  // C.ANDI
              default: begin
                unique case (c[6:5])
                  2'b00: instr_o = enc_r(7'b0100000, rs2p, rs1p, 3'b000, rs1p);  // C.SUB
                  2'b01: instr_o = enc_r(7'b0000000, rs2p, rs1p, 3'b100, rs1p);  // C.XOR
                  2'b10: instr_o = enc_r(7'b0000000, rs2p, rs1p, 3'b110, rs1p);  // C.OR
                  default: instr_o = enc_r(7'b0000000, rs2p, rs1p, 3'b111, rs1p); // C.AND
                endcase
                illegal_o = c[12];  // RV64 forms and Zcb, not built
              end
            endcase
          end
          3'b101: instr_o = enc_j(joff, 5'd0);                               // C.J
          3'b110: instr_o = enc_b(boff, rs1p, 3'b000);                       // C.BEQZ
          default: instr_o = enc_b(boff, rs1p, 3'b001);                      // C.BNEZ
        endcase
      end
      2'b10: begin
        unique case (c[15:13])
          3'b000: begin                                                      // C.SLLI
            instr_o   = enc_i({7'b0000000, c[6:2]}, rd, 3'b001, rd, OPC_OPIMM);
            illegal_o = c[12];
          end
          3'b010: begin                                                      // C.LWSP
            instr_o   = enc_i({4'b0, c[3:2], c[12], c[6:4], 2'b00}, 5'd2, 3'b010, rd, OPC_LOAD);
            illegal_o = (rd == 5'd0);
          end
          3'b100: begin
            if (!c[12]) begin
              if (rs2 == 5'd0) begin                                         // C.JR
                instr_o   = enc_i(12'd0, rd, 3'b000, 5'd0, OPC_JALR);
                illegal_o = (rd == 5'd0);
              end else instr_o = enc_r(7'b0, rs2, 5'd0, 3'b000, rd);         // C.MV
            end else begin
              if (rs2 == 5'd0) begin
                instr_o   = enc_i(12'd0, rd, 3'b000, 5'd1, OPC_JALR);        // C.JALR
                illegal_o = (rd == 5'd0);                                    // C.EBREAK
              end else instr_o = enc_r(7'b0, rs2, rd, 3'b000, rd);           // C.ADD
            end
          end
          3'b110: instr_o = enc_s({4'b0, c[8:7], c[12:9], 2'b00}, rs2, 5'd2);  // C.SWSP
          default: illegal_o = 1'b1;  // floating-point loads/stores
        endcase
      end
      default: ;  // 32-bit instruction
    endcase
  end
endmodule

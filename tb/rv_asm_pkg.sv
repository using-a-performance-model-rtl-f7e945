// rv_asm_pkg: RV32IM and RV32C instruction encoders for the testbenches.
//
// Each function returns the encoding of one instruction (32-bit, or 16-bit
// for the c_* functions, which take the architectural immediate and scatter
// its bits as the C extension specifies), so that test programs can be
// written as a list of calls instead of hex words. Registers named *p are
// 3-bit compressed register numbers (x8..x15).
package rv_asm_pkg;
  function automatic logic [31:0] r_type(input logic [6:0] f7, input logic [4:0] rs2, rs1,
                                         input logic [2:0] f3, input logic [4:0] rd,
                                         input logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] i_type(input logic [11:0] imm, input logic [4:0] rs1,
                                         input logic [2:0] f3, input logic [4:0] rd,
                                         input logic [6:0] opc);
    return {imm, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] s_type(input logic [11:0] imm, input logic [4:0] rs2, rs1,
                                         input logic [2:0] f3);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_type(input logic [12:0] off, input logic [4:0] rs2, rs1,
                                         input logic [2:0] f3);
    return {off[12], off[10:5], rs2, rs1, f3, off[4:1], off[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] lui(input logic [4:0] rd, input logic [19:0] imm);
    return {imm, rd, 7'b0110111};
  endfunction
  function automatic logic [31:0] auipc(input logic [4:0] rd, input logic [19:0] imm);
    return {imm, rd, 7'b0010111};
  endfunction
  function automatic logic [31:0] jal(input logic [4:0] rd, input logic [20:0] off);
    return {off[20], off[10:1], off[11], off[19:12], rd, 7'b1101111};
  endfunction
  function automatic logic [31:0] jalr(input logic [4:0] rd, rs1, input logic [11:0] imm);
    return i_type(imm, rs1, 3'b000, rd, 7'b1100111);
  endfunction
  function automatic logic [31:0] addi(input logic [4:0] rd, rs1, input logic [11:0] imm);
    return i_type(imm, rs1, 3'b000, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] add(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] mul(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0000001, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] lw(input logic [4:0] rd, rs1, input logic [11:0] imm);
    return i_type(imm, rs1, 3'b010, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] sw(input logic [4:0] rs2, rs1, input logic [11:0] imm);
    return s_type(imm, rs2, rs1, 3'b010);
  endfunction
  function automatic logic [31:0] bne(input logic [4:0] rs1, rs2, input logic [12:0] off);
    return b_type(off, rs2, rs1, 3'b001);
  endfunction
  function automatic logic [31:0] beq(input logic [4:0] rs1, rs2, input logic [12:0] off);
    return b_type(off, rs2, rs1, 3'b000);
  endfunction
  // ---- RV32C
  function automatic logic [15:0] c_addi4spn(input logic [2:0] rdp, input logic [9:0] u);
    return {3'b000, u[5:4], u[9:6], u[2], u[3], rdp, 2'b00};
  endfunction
  function automatic logic [15:0] c_lw(input logic [2:0] rdp, rs1p, input logic [6:0] u);
    return {3'b010, u[5:3], rs1p, u[2], u[6], rdp, 2'b00};
  endfunction
  function automatic logic [15:0] c_sw(input logic [2:0] rs2p, rs1p, input logic [6:0] u);
    return {3'b110, u[5:3], rs1p, u[2], u[6], rs2p, 2'b00};
  endfunction
  function automatic logic [15:0] c_addi(input logic [4:0] rd, input logic [5:0] i);
    return {3'b000, i[5], rd, i[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_li(input logic [4:0] rd, input logic [5:0] i);
    return {3'b010, i[5], rd, i[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_jal_j(input logic link, input logic [11:0] o);
    return {link ? 3'b001 : 3'b101, o[11], o[4], o[9:8], o[10], o[6], o[7], o[3:1], o[5], 2'b01};
  endfunction
  function automatic logic [15:0] c_addi16sp(input logic [9:0] n);
    return {3'b011, n[9], 5'd2, n[4], n[6], n[8:7], n[5], 2'b01};
  endfunction
  function automatic logic [15:0] c_lui(input logic [4:0] rd, input logic [5:0] n);  // imm[17:12]
    return {3'b011, n[5], rd, n[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_shift_andi(input logic [1:0] f2, input logic [2:0] rdp,
                                               input logic [5:0] i);  // 00 srli, 01 srai, 10 andi
    return {3'b100, i[5], f2, rdp, i[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_arith(input logic [1:0] f2, input logic [2:0] rdp, rs2p);
    return {3'b100, 1'b0, 2'b11, rdp, f2, rs2p, 2'b01};  // 00 sub, 01 xor, 10 or, 11 and
  endfunction
  function automatic logic [15:0] c_bz(input logic ne, input logic [2:0] rs1p, input logic [8:0] o);
    return {ne ? 3'b111 : 3'b110, o[8], o[4:3], rs1p, o[7:6], o[2:1], o[5], 2'b01};
  endfunction
  function automatic logic [15:0] c_slli(input logic [4:0] rd, input logic [4:0] sh);
    return {3'b000, 1'b0, rd, sh, 2'b10};
  endfunction
  function automatic logic [15:0] c_lwsp(input logic [4:0] rd, input logic [7:0] u);
    return {3'b010, u[5], rd, u[4:2], u[7:6], 2'b10};
  endfunction
  function automatic logic [15:0] c_swsp(input logic [4:0] rs2, input logic [7:0] u);
    return {3'b110, u[5:2], u[7:6], rs2, 2'b10};
  endfunction
  function automatic logic [15:0] c_jr_mv(input logic [4:0] rd, rs2);   // rs2 = 0: c.jr
    return {4'b1000, rd, rs2, 2'b10};
  endfunction
  function automatic logic [15:0] c_jalr_add(input logic [4:0] rd, rs2); // rs2 = 0: c.jalr
    return {4'b1001, rd, rs2, 2'b10};
  endfunction
endpackage

// alu: single-cycle integer ALU (RV32I arithmetic, logic, shifts, compares).
//
// The unit receives the registered issue-port data and produces its result in
// the same cycle, so an instruction issued in cycle t writes back in t+1,
// which is the one-cycle latency of non-memory, non-multiply instructions.
// The backend has two instances: ALU0 on the fixed-latency write-back port and
// ALU1 on the write-back port of the (absent) FPU. Operations: RV32I
// arithmetic, logic, shifts and compares, plus Zba (shift-and-add), Zbb
// (logic with negation, count leading/trailing zeros, population count,
// min/max, sign/zero extension, rotations, orc.b, rev8) and Zbs (single-bit
// clear, extract, invert, set), which the evaluated configuration enables.
// Carry-less multiplication (Zbc) is in the multiplier.
module alu
  import ss_pkg::*;
(
  input  logic     valid_i,
  input  fu_data_t data_i,
  output wb_t      wb_o
);
  xlen_t r;
  logic [5:0] clz, ctz, cpop;
  always_comb begin
    clz = 6'd32;
    for (int i = 0; i < XLEN; i++) if (data_i.a[i]) clz = 6'(XLEN - 1 - i);
    ctz = 6'd32;
    for (int i = XLEN - 1; i >= 0; i--) if (data_i.a[i]) ctz = 6'(i);
    cpop = '0;
    for (int i = 0; i < XLEN; i++) cpop += 6'(data_i.a[i]);
  end

  always_comb begin
    unique case (data_i.op)
      OP_ADD:  r = data_i.a + data_i.b;
      OP_SUB:  r = data_i.a - data_i.b;
      OP_SLL:  r = data_i.a << data_i.b[4:0];
      OP_SLT:  r = {{(XLEN-1){1'b0}}, $signed(data_i.a) < $signed(data_i.b)};
      OP_SLTU: r = {{(XLEN-1){1'b0}}, data_i.a < data_i.b};
      OP_XOR:  r = data_i.a ^ data_i.b;
      OP_SRL:  r = data_i.a >> data_i.b[4:0];
      OP_SRA:  r = xlen_t'($signed(data_i.a) >>> data_i.b[4:0]);
      OP_OR:   r = data_i.a | data_i.b;
      OP_AND:  r = data_i.a & data_i.b;
      OP_SH1ADD: r = (data_i.a << 1) + data_i.b;
      OP_SH2ADD: r = (data_i.a << 2) + data_i.b;
      OP_SH3ADD: r = (data_i.a << 3) + data_i.b;
      OP_ANDN:  r = data_i.a & ~data_i.b;
      OP_ORN:   r = data_i.a | ~data_i.b;
      OP_XNOR:  r = ~(data_i.a ^ data_i.b);
      OP_CLZ:   r = XLEN'(clz);
      OP_CTZ:   r = XLEN'(ctz);
      OP_CPOP:  r = XLEN'(cpop);
      OP_MAX:   r = ($signed(data_i.a) < $signed(data_i.b)) ? data_i.b : data_i.a;
      OP_MAXU:  r = (data_i.a < data_i.b) ? data_i.b : data_i.a;
      OP_MIN:   r = ($signed(data_i.a) < $signed(data_i.b)) ? data_i.a : data_i.b;
      OP_MINU:  r = (data_i.a < data_i.b) ? data_i.a : data_i.b;
      OP_SEXTB: r = {{(XLEN-8){data_i.a[7]}}, data_i.a[7:0]};
      OP_SEXTH: r = {{(XLEN-16){data_i.a[15]}}, data_i.a[15:0]};
      OP_ZEXTH: r = {{(XLEN-16){1'b0}}, data_i.a[15:0]};
      OP_ROL:   r = (data_i.a << data_i.b[4:0]) | (data_i.a >> (5'(XLEN - 32'(data_i.b[4:0])) ));
      OP_ROR:   r = (data_i.a >> data_i.b[4:0]) | (data_i.a << (5'(XLEN - 32'(data_i.b[4:0])) ));
      OP_ORCB:  for (int i = 0; i < XLEN / 8; i++) r[8*i +: 8] = {8{|data_i.a[8*i +: 8]}};
      OP_REV8:  for (int i = 0; i < XLEN / 8; i++) r[8*i +: 8] = data_i.a[XLEN-8-8*i +: 8];
      OP_BCLR:  r = data_i.a & ~(xlen_t'(1) << data_i.b[4:0]);
      OP_BEXT:  r = xlen_t'((data_i.a >> data_i.b[4:0]) & xlen_t'(1));
      OP_BINV:  r = data_i.a ^ (xlen_t'(1) << data_i.b[4:0]);
      OP_BSET:  r = data_i.a | (xlen_t'(1) << data_i.b[4:0]);
      default: r = '0;
    endcase
  end
  assign wb_o = '{valid: valid_i, trans_id: data_i.trans_id, data: r};
endmodule

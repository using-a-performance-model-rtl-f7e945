// multiplier: RV32M and Zbc (carry-less) multiplier with a two-stage pipeline.
//
// Stage 1 (the cycle after issue) forms the 64-bit product of the operands,
// sign- or zero-extended as MUL/MULH/MULHSU/MULHU require, or their 64-bit
// carry-less product for CLMUL/CLMULH/CLMULR, and registers it; stage 2
// selects the low half, the high half, or bits 62..31 (CLMULR) and writes
// back. An instruction issued
// in cycle t therefore writes back in t+2, the two-cycle latency the paper
// gives for multiplications. A new multiplication can enter every cycle. The
// issue stage keeps ALU0 and the branch unit, which share this unit's
// write-back port, away from the cycle in which a product comes out.
module multiplier
  import ss_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     valid_i,
  input  fu_data_t data_i,
  output wb_t      wb_o
);
  logic              v_q;
  trans_id_t         id_q;
  logic [1:0]        sel_q;   // 0: low half, 1: high half, 2: bits 62..31
  logic [2*XLEN-1:0] prod_q;

  // operands extended to 2*XLEN bits, signed or unsigned as the operation needs
  logic signed [2*XLEN-1:0] sa, sb;
  always_comb begin
    sa = {{XLEN{(data_i.op == OP_MULH || data_i.op == OP_MULHSU) && data_i.a[XLEN-1]}}, data_i.a};
    sb = {{XLEN{(data_i.op == OP_MULH) && data_i.b[XLEN-1]}}, data_i.b};
  end

  logic [2*XLEN-1:0] clprod;
  logic              is_cl;
  always_comb begin
    clprod = '0;
    for (int i = 0; i < XLEN; i++)
      if (data_i.b[i]) clprod ^= {{XLEN{1'b0}}, data_i.a} << i;
    is_cl = data_i.op inside {OP_CLMUL, OP_CLMULH, OP_CLMULR};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      v_q    <= 1'b0;
      id_q   <= '0;
      sel_q  <= '0;
      prod_q <= '0;
    end else begin
      v_q <= valid_i;
      if (valid_i) begin
        id_q   <= data_i.trans_id;
        sel_q  <= (data_i.op == OP_MUL || data_i.op == OP_CLMUL) ? 2'd0 :
                  (data_i.op == OP_CLMULR) ? 2'd2 : 2'd1;
        prod_q <= is_cl ? clprod : sa * sb;
      end
    end
  end

  assign wb_o = '{valid: v_q, trans_id: id_q,
                  data: (sel_q == 2'd0) ? prod_q[XLEN-1:0] :
                        (sel_q == 2'd1) ? prod_q[2*XLEN-1:XLEN] : prod_q[2*XLEN-2:XLEN-1]};
endmodule

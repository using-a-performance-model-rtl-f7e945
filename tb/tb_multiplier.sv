// tb_multiplier: back-to-back random multiplications of all seven kinds
// (RV32M and the Zbc carry-less ones). Each
// result must appear exactly one cycle after the operands are presented
// (two cycles after issue, counting the issue register), with its trans_id,
// and a new multiplication is accepted every cycle.
`timescale 1ns/1ps
module tb_multiplier;
  import ss_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic v; fu_data_t d; wb_t wb;
  multiplier dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(v), .data_i(d), .wb_o(wb));

  function automatic logic [31:0] ref_mul(input op_t op, input logic [31:0] a, b);
    logic [63:0] p;
    case (op)
      OP_MUL:    p = {32'b0, a} * {32'b0, b};
      OP_MULH:   p = $signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b});
      OP_MULHSU: p = $signed({{32{a[31]}}, a}) * $signed({32'b0, b});
      OP_MULHU:  p = {32'b0, a} * {32'b0, b};
      default: begin  // carry-less, bit by bit
        p = '0;
        for (int i = 0; i < 32; i++)
          for (int j = 0; j < 32; j++)
            p[i+j] ^= a[i] & b[j];
      end
    endcase
    if (op == OP_CLMULR) return p[62:31];
    return (op == OP_MUL || op == OP_CLMUL) ? p[31:0] : p[63:32];
  endfunction

  logic exp_v; logic [31:0] exp_d; trans_id_t exp_id;
  initial begin
    op_t ops[7] = '{OP_MUL, OP_MULH, OP_MULHSU, OP_MULHU, OP_CLMUL, OP_CLMULH, OP_CLMULR};
    v = 0; d = '0; exp_v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // check what was presented one cycle ago
      checks++;
      if (wb.valid !== exp_v || (exp_v && (wb.data !== exp_d || wb.trans_id !== exp_id))) begin
        failures++;
        if (failures < 10) $display("cycle %0d: valid %b data %h id %0d, exp %b %h %0d",
                                    i, wb.valid, wb.data, wb.trans_id, exp_v, exp_d, exp_id);
      end
      v = ($urandom_range(0, 3) != 0);
      d = '0;
      d.op = ops[$urandom_range(0, 6)];
      d.a = (i % 5 == 0) ? 32'hffff_ffff : $urandom;
      d.b = (i % 7 == 0) ? 32'h8000_0000 : $urandom;
      d.trans_id = trans_id_t'(i);
      exp_v = v; exp_d = ref_mul(d.op, d.a, d.b); exp_id = d.trans_id;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sb_interval: exhaustive test of the cyclic interval mask for N = 4 and
// N = 8. The expected mask is built by walking from A towards B with
// wrap-around, independently of the comparison form used by the module.
`timescale 1ns/1ps
module tb_sb_interval;
  int checks = 0, failures = 0;
  logic [1:0] a4, b4; logic [3:0] m4;
  logic [2:0] a8, b8; logic [7:0] m8;
  sb_interval #(.N(4)) dut4 (.a_i(a4), .b_i(b4), .mask_o(m4));
  sb_interval #(.N(8)) dut8 (.a_i(a8), .b_i(b8), .mask_o(m8));

  function automatic logic [7:0] walk(input int a, input int b, input int n);
    logic [7:0] m = '0;
    for (int i = a; i != b; i = (i + 1) % n) m[i] = 1'b1;
    return m;
  endfunction

  initial begin
    for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) begin
      a4 = 2'(a); b4 = 2'(b); #1;
      checks++;
      if (m4 !== walk(a, b, 4)[3:0]) begin failures++; $display("N=4 A=%0d B=%0d got %b", a, b, m4); end
    end
    for (int a = 0; a < 8; a++) for (int b = 0; b < 8; b++) begin
      a8 = 3'(a); b8 = 3'(b); #1;
      checks++;
      if (m8 !== walk(a, b, 8)) begin failures++; $display("N=8 A=%0d B=%0d got %b", a, b, m8); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

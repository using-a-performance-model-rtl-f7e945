// tb_fu_mux: the multiplexer in front of the multiplier must pass the issue
// port that targets the multiplier, whichever port it is, and nothing else.
`timescale 1ns/1ps
module tb_fu_mux;
  import ss_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [1:0] pv; unit_t [1:0] pu; fu_data_t [1:0] pd;
  logic v; fu_data_t d;
  fu_mux #(.UNIT(U_MULT)) dut (.clk_i(clk), .rst_ni(1'b1), .port_valid_i(pv), .port_unit_i(pu),
                               .port_data_i(pd), .valid_o(v), .data_o(d));
  initial begin
    for (int i = 0; i < 400; i++) begin
      logic ev; fu_data_t ed;
      @(negedge clk);
      pd[0] = {$urandom, $urandom, $urandom, $urandom};
      pd[1] = {$urandom, $urandom, $urandom, $urandom};
      pv = 2'($urandom);
      pu[0] = unit_t'($urandom_range(0, 4));
      pu[1] = unit_t'($urandom_range(0, 4));
      if (pv[0] && pv[1] && pu[0] == U_MULT && pu[1] == U_MULT) pu[1] = U_ALU0;
      #1;
      ev = (pv[0] && pu[0] == U_MULT) || (pv[1] && pu[1] == U_MULT);
      ed = (pv[1] && pu[1] == U_MULT) ? pd[1] : pd[0];
      checks++;
      if (v !== ev || (ev && d !== ed)) begin
        failures++; $display("mux mismatch: pv=%b pu=%0d,%0d v=%b", pv, pu[0], pu[1], v);
      end
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

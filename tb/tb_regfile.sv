// tb_regfile: random writes on both ports and reads on all four, compared
// with an array model: x0 stays zero, port 1 wins when both write the same
// register, writes are visible from the next cycle.
`timescale 1ns/1ps
module tb_regfile;
  import ss_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0][4:0] ra; xlen_t [3:0] rd;
  logic [1:0] we; logic [1:0][4:0] wa; xlen_t [1:0] wd;
  regfile dut (.clk_i(clk), .rst_ni(rst_n), .raddr_i(ra), .rdata_o(rd),
               .we_i(we), .waddr_i(wa), .wdata_i(wd));
  logic [31:0] m [32];
  initial begin
    for (int i = 0; i < 32; i++) m[i] = 0;
    we = 0; wa = '0; wd = '0; ra = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int r = 0; r < 4; r++) ra[r] = 5'($urandom);
      #1;
      for (int r = 0; r < 4; r++) begin
        checks++;
        if (rd[r] !== m[ra[r]]) begin
          failures++;
          if (failures < 10) $display("read x%0d got %h exp %h", ra[r], rd[r], m[ra[r]]);
        end
      end
      we = 2'($urandom);
      wa[0] = 5'($urandom_range(0, 7)); wa[1] = 5'($urandom_range(0, 7));
      wd[0] = $urandom; wd[1] = $urandom;
      @(posedge clk);
      if (we[0] && wa[0] != 0) m[wa[0]] = wd[0];
      if (we[1] && wa[1] != 0) m[wa[1]] = wd[1];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

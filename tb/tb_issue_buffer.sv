// tb_issue_buffer: random acknowledgements (a prefix of the valid entries)
// and random inputs up to the announced room, against a two-entry queue
// model; includes flushes. Checks in_room_o, the output entries and that a
// full buffer issuing two takes two new instructions in the same cycle.
`timescale 1ns/1ps
module tb_issue_buffer;
  import ss_pkg::*;
  int checks = 0, failures = 0, n_swap2 = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush; logic [1:0] iv, room, ov, ack; instr_t [1:0] id, od;
  issue_buffer dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .in_valid_i(iv),
                    .in_data_i(id), .in_room_o(room), .out_valid_o(ov), .out_data_o(od), .ack_i(ack));
  instr_t q[$];
  int tag = 1;
  initial begin
    flush = 0; iv = 0; ack = 0; id = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int na, nin, eroom;
      @(negedge clk);
      checks++;
      if (ov[0] !== (q.size() >= 1) || ov[1] !== (q.size() >= 2) ||
          (q.size() >= 1 && od[0] !== q[0]) || (q.size() >= 2 && od[1] !== q[1])) begin
        failures++;
        if (failures < 10) $display("cycle %0d: size %0d ov %b", i, q.size(), ov);
      end
      na = $urandom_range(0, q.size());
      ack = (na == 2) ? 2'b11 : (na == 1) ? 2'b01 : 2'b00;
      #1;
      eroom = 2 - (q.size() - na);
      checks++;
      if (room !== 2'(eroom)) begin failures++; $display("room %0d exp %0d", room, eroom); end
      nin = $urandom_range(0, eroom);
      iv = (nin == 2) ? 2'b11 : (nin == 1) ? 2'b01 : 2'b00;
      for (int k = 0; k < 2; k++) begin id[k] = '0; id[k].pc = 32'(tag); id[k].imm = $urandom; tag++; end
      flush = ($urandom_range(0, 40) == 0);
      if (q.size() == 2 && na == 2 && nin == 2) n_swap2++;
      @(posedge clk);
      if (flush) q.delete();
      else begin
        repeat (na) void'(q.pop_front());
        if (iv[0]) q.push_back(id[0]);
        if (iv[1]) q.push_back(id[1]);
      end
    end
    checks++;
    if (n_swap2 == 0) begin failures++; $display("never issued two and took two"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_instr_queue: random pushes of zero, one or two instructions and random
// pops of up to two, with occasional flushes, against a queue model. Checks
// the head entries, their valid flags, push_ready (two free places) and that
// a flush empties the queue and drops the push of the same cycle.
`timescale 1ns/1ps
module tb_instr_queue;
  import ss_pkg::*;
  int checks = 0, failures = 0, n_full = 0, n_flush = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush; logic [1:0] push, pop, hv; fetch_entry_t [1:0] pd, hd; logic ready;
  instr_queue #(.DEPTH(8)) dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .push_i(push),
                                .push_data_i(pd), .push_ready_o(ready), .head_valid_o(hv),
                                .head_o(hd), .pop_i(pop));
  fetch_entry_t q[$];
  int tag = 0;
  initial begin
    flush = 0; push = 0; pop = 0; pd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      checks++;
      if (ready !== (q.size() <= 6) || hv[0] !== (q.size() >= 1) || hv[1] !== (q.size() >= 2) ||
          (q.size() >= 1 && hd[0] !== q[0]) || (q.size() >= 2 && hd[1] !== q[1])) begin
        failures++;
        if (failures < 10) $display("cycle %0d: size %0d ready %b hv %b", i, q.size(), ready, hv);
      end
      if (q.size() == 8) n_full++;
      flush = ($urandom_range(0, 60) == 0);
      push = ready ? 2'($urandom_range(0, 3)) : 2'b00;
      if (i % 200 < 100 && ready) push = 2'b11;  // phases that fill the queue
      for (int k = 0; k < 2; k++) begin
        pd[k] = '0; pd[k].pc = 32'(tag); pd[k].instr = $urandom; tag++;
      end
      case ($urandom_range(0, 2))
        0: pop = 2'b00;
        1: pop = {1'b0, hv[0]};
        default: pop = hv;
      endcase
      if (i % 200 < 100 && $urandom_range(0, 2) != 0) pop = 2'b00;
      @(posedge clk);
      if (flush) begin q.delete(); n_flush++; end
      else begin
        if (pop[0]) void'(q.pop_front());
        if (pop[1]) void'(q.pop_front());
        if (push[0]) q.push_back(pd[0]);
        if (push[1]) q.push_back(pd[1]);
      end
    end
    checks++;
    if (n_full == 0 || n_flush == 0) begin failures++; $display("queue never full or never flushed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

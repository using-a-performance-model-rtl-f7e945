// instr_queue: instruction queue between the 64-bit fetch and the decoders.
//
// A circular FIFO of fetched instructions (pc, instruction word, prediction).
// A 64-bit fetch delivers up to two 32-bit instructions per cycle, pushed in
// slot order; push_ready_o is high when two slots are free. The two oldest
// entries are shown at the head; pop_i takes one or two of them (pop_i[1]
// only with pop_i[0]). flush_i empties the queue and wins over a push in the
// same cycle. Popping up to two per cycle is the dual-issue change to the
// queue; its depth of 8 is this design's choice.
module instr_queue
  import ss_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       flush_i,
  input  logic [1:0]                 push_i,
  input  fetch_entry_t [1:0]         push_data_i,
  output logic                       push_ready_o,
  output logic [1:0]                 head_valid_o,
  output fetch_entry_t [1:0]         head_o,
  input  logic [1:0]                 pop_i
);
  localparam int unsigned PW = $clog2(DEPTH);

  fetch_entry_t    mem_q [DEPTH];
  logic [PW-1:0]   rd_q, wr_q;
  logic [PW:0]     cnt_q;

  logic [1:0] npush, npop;
  logic [PW-1:0] rd1;
  assign rd1 = rd_q + 1'b1;

  always_comb begin
    npush = 2'(push_i[0]) + 2'(push_i[1]);
    npop  = 2'(pop_i[0]) + 2'(pop_i[1]);
  end

  assign push_ready_o    = (cnt_q <= (PW+1)'(DEPTH - 2));
  assign head_valid_o[0] = (cnt_q >= 1);
  assign head_valid_o[1] = (cnt_q >= 2);
  assign head_o[0]       = mem_q[rd_q];
  assign head_o[1]       = mem_q[rd1];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else if (flush_i) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else begin
      // pushes are packed: a single push may come on either slot
      if (push_i[0] && push_i[1]) begin
        mem_q[wr_q]         <= push_data_i[0];
        mem_q[PW'(wr_q + 1)] <= push_data_i[1];
      end else if (push_i[0]) begin
        mem_q[wr_q] <= push_data_i[0];
      end else if (push_i[1]) begin
        mem_q[wr_q] <= push_data_i[1];
      end
      wr_q  <= wr_q + PW'(npush);
      rd_q  <= rd_q + PW'(npop);
      cnt_q <= cnt_q + (PW+1)'(npush) - (PW+1)'(npop);
    end
  end

  a_pop_order: assert property (@(posedge clk_i) disable iff (!rst_ni) !(pop_i[1] && !pop_i[0]));
  a_pop_valid: assert property (@(posedge clk_i) disable iff (!rst_ni || flush_i)
                                (!pop_i[0] || head_valid_o[0]) && (!pop_i[1] || head_valid_o[1]));
  a_push_room: assert property (@(posedge clk_i) disable iff (!rst_ni || flush_i)
                                push_i == 2'b00 || push_ready_o);
endmodule

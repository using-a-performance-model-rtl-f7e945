// issue_buffer: two-entry FIFO of decoded instructions in front of the issue
// stage.
//
// Entry 0 is the oldest. Each cycle the issue stage acknowledges a prefix of
// the valid entries (ack_i[1] only with ack_i[0]); the remaining entries move
// to the front and new decoded instructions fill the freed places in order.
// in_room_o says how many instructions can be accepted this cycle, counting
// the places freed by this cycle's acknowledgements, so a full buffer that
// issues two instructions takes two new ones in the same cycle. flush_i
// empties the buffer and drops this cycle's inputs. The two-entry depth is
// the paper's; the shifting organisation is this design's choice.
module issue_buffer
  import ss_pkg::*;
(
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         flush_i,
  input  logic [1:0]   in_valid_i,   // prefix: in_valid_i[1] only with [0]
  input  instr_t [1:0] in_data_i,
  output logic [1:0]   in_room_o,    // 0, 1 or 2
  output logic [1:0]   out_valid_o,
  output instr_t [1:0] out_data_o,
  input  logic [1:0]   ack_i
);
  logic   [1:0] v_q;
  instr_t [1:0] d_q;

  logic [1:0] nack;
  assign nack        = 2'(ack_i[0]) + 2'(ack_i[1]);
  assign out_valid_o = v_q;
  assign out_data_o  = d_q;

  logic [1:0] nkeep;
  assign nkeep     = 2'(v_q[0]) + 2'(v_q[1]) - nack;
  assign in_room_o = 2'd2 - nkeep;

  logic   [1:0] v_d;
  instr_t [1:0] d_d;
  always_comb begin
    instr_t [3:0] all;
    logic   [3:0] allv;
    // remaining old entries followed by the new ones, then take the first two
    all  = '0;
    allv = '0;
    if (nkeep == 2'd2)      begin all[0] = d_q[0]; all[1] = d_q[1]; allv[1:0] = 2'b11; end
    else if (nkeep == 2'd1) begin all[0] = d_q[nack[0] ? 1 : 0]; allv[0] = 1'b1; end
    for (int unsigned k = 0; k < 2; k++) begin
      if (in_valid_i[k] && (32'(nkeep) + k) < 2) begin
        all[32'(nkeep) + k]  = in_data_i[k];
        allv[32'(nkeep) + k] = 1'b1;
      end
    end
    v_d = allv[1:0];
    d_d = all[1:0];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      v_q <= '0; d_q <= '0;
    end else if (flush_i) begin
      v_q <= '0;
    end else begin
      v_q <= v_d; d_q <= d_d;
    end
  end

  a_ack_prefix: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                 !(ack_i[1] && !ack_i[0]) && ((ack_i & ~v_q) == 2'b00));
  a_in_fits: assert property (@(posedge clk_i) disable iff (!rst_ni || flush_i)
                              (2'(in_valid_i[0]) + 2'(in_valid_i[1])) <= in_room_o);
endmodule

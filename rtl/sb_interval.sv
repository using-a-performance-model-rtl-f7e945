// sb_interval: cyclic interval mask for the speculative scoreboard.
//
// Given two indexes A and B of an N-entry circular buffer, returns an N-bit
// vector whose bit i is set when i lies in [A;B[, walking upwards from A and
// wrapping at N. A > B is therefore valid and selects the entries A..N-1 and
// 0..B-1; A == B selects nothing. The scoreboard uses it to mark the entries
// between a mispredicted branch (A = branch index + 1) and the issue pointer
// (B) as cancelled. Purely combinational. The function is the paper's; the
// two-comparison formulation below is this design's.
module sb_interval #(
  parameter int unsigned N = 4
) (
  input  logic [$clog2(N)-1:0] a_i,
  input  logic [$clog2(N)-1:0] b_i,
  output logic [N-1:0]         mask_o
);
  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      if (a_i <= b_i) mask_o[i] = (i >= a_i) && (i < b_i);
      else            mask_o[i] = (i >= a_i) || (i < b_i);
    end
  end
endmodule

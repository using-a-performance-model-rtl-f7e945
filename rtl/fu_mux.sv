// fu_mux: 2-1 multiplexer in front of one functional unit.
//
// The issue stage emits up to two instructions per cycle, each tagged with the
// unit it targets. This multiplexer passes to its unit the issue port whose
// target is UNIT. There is no precedence: the issue stage never sends two
// instructions to the same unit in one cycle, and an assertion checks that.
// Combinational.
module fu_mux
  import ss_pkg::*;
#(
  parameter unit_t UNIT = U_ALU0
) (
  input  logic                       clk_i,   // for the assertion only
  input  logic                       rst_ni,
  input  logic [ISSUE_WIDTH-1:0]     port_valid_i,
  input  unit_t [ISSUE_WIDTH-1:0]    port_unit_i,
  input  fu_data_t [ISSUE_WIDTH-1:0] port_data_i,
  output logic                       valid_o,
  output fu_data_t                   data_o
);
  logic sel0, sel1;
  assign sel0 = port_valid_i[0] && (port_unit_i[0] == UNIT);
  assign sel1 = port_valid_i[1] && (port_unit_i[1] == UNIT);
  assign valid_o = sel0 | sel1;
  assign data_o  = sel1 ? port_data_i[1] : port_data_i[0];

  a_one_port: assert property (@(posedge clk_i) disable iff (!rst_ni) !(sel0 && sel1))
    else $error("fu_mux: both issue ports target the same unit");
endmodule

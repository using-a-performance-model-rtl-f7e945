// ex_stage: execute stage of the dual-issue backend.
//
// The two registered issue ports fan out to five functional units, each
// behind a 2-1 multiplexer (fu_mux) that picks the port targeting it: ALU0,
// ALU1, the branch unit, the multiplier and the load/store unit. Results leave
// on four write-back ports to the scoreboard:
//   WB_FLU   ALU0, branch unit and multiplier (one at a time, ensured by the
//            issue stage's structural-hazard rules and checked by an assertion)
//   WB_LOAD  loads;  WB_STORE  stores
//   WB_FPU   ALU1, which borrows the port of the FPU this core does not have.
// The branch resolution goes to the scoreboard (partial flush) and to the
// frontend (redirect). The data-memory ports of the load/store unit are
// brought out.
module ex_stage
  import ss_pkg::*;
(
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic [ISSUE_WIDTH-1:0]     port_valid_i,
  input  unit_t [ISSUE_WIDTH-1:0]    port_unit_i,
  input  fu_data_t [ISSUE_WIDTH-1:0] port_data_i,
  input  logic [NR_SB_ENTRIES-1:0]   sb_cancelled_i,
  output wb_t [NR_WB_PORTS-1:0]      wb_o,
  output bres_t                      bres_o,
  // store release from the commit stage
  input  logic                       commit_store_i,
  input  logic                       discard_store_i,
  output logic                       sq_empty_o,
  // data memory
  output logic                       dmem_req_o,
  output xlen_t                      dmem_raddr_o,
  input  xlen_t                      dmem_rdata_i,
  output logic                       dmem_we_o,
  output xlen_t                      dmem_waddr_o,
  output xlen_t                      dmem_wdata_o,
  output logic [3:0]                 dmem_be_o
);
  logic     [NR_UNITS-1:0] u_valid;
  fu_data_t [NR_UNITS-1:0] u_data;

  for (genvar u = 0; u < NR_UNITS; u++) begin : g_mux
    fu_mux #(.UNIT(unit_t'(u))) i_mux (
      .clk_i        (clk_i),
      .rst_ni       (rst_ni),
      .port_valid_i (port_valid_i),
      .port_unit_i  (port_unit_i),
      .port_data_i  (port_data_i),
      .valid_o      (u_valid[u]),
      .data_o       (u_data[u])
    );
  end

  wb_t alu0_wb, alu1_wb, br_wb, mul_wb;

  alu i_alu0 (.valid_i(u_valid[U_ALU0]), .data_i(u_data[U_ALU0]), .wb_o(alu0_wb));
  alu i_alu1 (.valid_i(u_valid[U_ALU1]), .data_i(u_data[U_ALU1]), .wb_o(alu1_wb));

  branch_unit i_branch (
    .valid_i     (u_valid[U_BRANCH]),
    .data_i      (u_data[U_BRANCH]),
    .cancelled_i (sb_cancelled_i[u_data[U_BRANCH].trans_id]),
    .wb_o        (br_wb),
    .bres_o      (bres_o)
  );

  multiplier i_mult (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .valid_i (u_valid[U_MULT]),
    .data_i  (u_data[U_MULT]),
    .wb_o    (mul_wb)
  );

  lsu i_lsu (
    .clk_i           (clk_i),
    .rst_ni          (rst_ni),
    .valid_i         (u_valid[U_LSU]),
    .data_i          (u_data[U_LSU]),
    .commit_store_i  (commit_store_i),
    .discard_store_i (discard_store_i),
    .dmem_req_o      (dmem_req_o),
    .dmem_raddr_o    (dmem_raddr_o),
    .dmem_rdata_i    (dmem_rdata_i),
    .dmem_we_o       (dmem_we_o),
    .dmem_waddr_o    (dmem_waddr_o),
    .dmem_wdata_o    (dmem_wdata_o),
    .dmem_be_o       (dmem_be_o),
    .load_wb_o       (wb_o[WB_LOAD]),
    .store_wb_o      (wb_o[WB_STORE]),
    .sq_empty_o      (sq_empty_o)
  );

  always_comb begin
    if (alu0_wb.valid)    wb_o[WB_FLU] = alu0_wb;
    else if (br_wb.valid) wb_o[WB_FLU] = br_wb;
    else                  wb_o[WB_FLU] = mul_wb;
  end
  assign wb_o[WB_FPU] = alu1_wb;

  a_flu_port: assert property (@(posedge clk_i) disable iff (!rst_ni)
                               $onehot0({alu0_wb.valid, br_wb.valid, mul_wb.valid}))
    else $error("ex_stage: write-back conflict on the fixed-latency port");
endmodule

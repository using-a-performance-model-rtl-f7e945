// issue_read_operands: issue decision, operand read and forwarding for two
// instructions per cycle.
//
// Each cycle it looks at the two oldest instructions of the issue buffer and
// issues a prefix of them (instruction 1 only if instruction 0 issues), then
// registers, for each issue port, the target unit and the operands. The
// functional units start in the next cycle. An instruction issues when:
//  - the scoreboard has room: not full for port 0, more than one free entry
//    for port 1 (odd/even detection in the scoreboard);
//  - every source register written by a live (non-cancelled) scoreboard entry
//    has its result available, in the entry or on a write-back port this very
//    cycle; that value is forwarded, otherwise the register file is read
//    (RAW);
//  - its destination register is not the destination of a live entry (WAW:
//    there is no register renaming);
//  - for port 1, it neither reads nor writes the destination of instruction 0;
//  - its unit is free. Units follow the performance model: issuing to a unit
//    makes it and every unit sharing its write-back port busy for the rest of
//    the cycle; and because the multiplier takes two cycles, a multiplication
//    issued in the previous cycle makes ALU0 and the branch unit (its
//    write-back port mates) busy in this one. ALU instructions go to ALU0, or
//    to ALU1 (on the FPU write-back port) when ALU0 is busy;
//  - for a load, no live store is waiting in the scoreboard, nor issuing on
//    port 0 (this design's simple memory ordering rule);
//  - without SPEC_SB_EN, port 1 also waits when port 0 is a control flow.
// Nothing issues in a cycle with flush_i (a branch mispredict being resolved).
module issue_read_operands
  import ss_pkg::*;
#(
  parameter int unsigned N          = NR_SB_ENTRIES,
  parameter bit          SPEC_SB_EN = 1'b1
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic                        flush_i,
  // issue buffer
  input  logic [ISSUE_WIDTH-1:0]      ib_valid_i,
  input  instr_t [ISSUE_WIDTH-1:0]    ib_instr_i,
  output logic [ISSUE_WIDTH-1:0]      issue_o,       // ack to buffer and scoreboard
  // scoreboard
  input  logic                        sb_full_i,
  input  logic                        sb_one_free_i,
  input  sb_view_t [N-1:0]            sb_view_i,
  input  logic [ISSUE_WIDTH-1:0][$clog2(N)-1:0] sb_issue_id_i,
  // register file
  output logic [NR_RF_RPORTS-1:0][4:0] rf_raddr_o,
  input  xlen_t [NR_RF_RPORTS-1:0]    rf_rdata_i,
  // to the execute stage (registered)
  output logic [ISSUE_WIDTH-1:0]      port_valid_o,
  output unit_t [ISSUE_WIDTH-1:0]     port_unit_o,
  output fu_data_t [ISSUE_WIDTH-1:0]  port_data_o,
  output issue_perf_t                 perf_o
);
  logic                     mult_q;   // a multiplication issued last cycle
  logic [NR_UNITS-1:0]      busy;
  logic [ISSUE_WIDTH-1:0]   issue;
  unit_t [ISSUE_WIDTH-1:0]  unit;
  fu_data_t [ISSUE_WIDTH-1:0] fdata;
  logic                     live_store;

  for (genvar k = 0; k < ISSUE_WIDTH; k++) begin : g_rf
    assign rf_raddr_o[2*k]   = ib_instr_i[k].rs1;
    assign rf_raddr_o[2*k+1] = ib_instr_i[k].rs2;
  end

  always_comb begin
    logic       ok, fwd1, fwd2, stall_raw, stall_waw;
    xlen_t      v1, v2;
    instr_t     in;
    busy   = '0;
    issue  = '0;
    unit   = {ISSUE_WIDTH{U_ALU0}};
    fdata  = '0;
    perf_o = '0;
    if (mult_q) begin
      busy[U_ALU0]   = 1'b1;
      busy[U_BRANCH] = 1'b1;
    end
    live_store = 1'b0;
    for (int unsigned e = 0; e < N; e++)
      if (sb_view_i[e].valid && !sb_view_i[e].cancelled && sb_view_i[e].is_store) live_store = 1'b1;

    for (int unsigned k = 0; k < ISSUE_WIDTH; k++) begin
      in = ib_instr_i[k];
      ok = ib_valid_i[k] && !flush_i && (k == 0 || issue[0]);
      // scoreboard space
      if (ok && k == 0 && sb_full_i)     begin ok = 1'b0; perf_o.sb_full = 1'b1; end
      if (ok && k == 1 && sb_one_free_i) begin ok = 1'b0; perf_o.sb_one_free = 1'b1; end
      // RAW and WAW against live scoreboard entries
      fwd1 = 1'b0; fwd2 = 1'b0; v1 = rf_rdata_i[2*k]; v2 = rf_rdata_i[2*k+1];
      stall_raw = 1'b0; stall_waw = 1'b0;
      for (int unsigned e = 0; e < N; e++) begin
        if (sb_view_i[e].valid && !sb_view_i[e].cancelled && sb_view_i[e].rd != 5'd0) begin
          if (in.use_rs1 && in.rs1 == sb_view_i[e].rd) begin
            if (sb_view_i[e].avail) begin fwd1 = 1'b1; v1 = sb_view_i[e].value; end
            else stall_raw = 1'b1;
          end
          if (in.use_rs2 && in.rs2 == sb_view_i[e].rd) begin
            if (sb_view_i[e].avail) begin fwd2 = 1'b1; v2 = sb_view_i[e].value; end
            else stall_raw = 1'b1;
          end
          if (in.rd == sb_view_i[e].rd) stall_waw = 1'b1;
        end
      end
      if (ok && stall_raw) begin ok = 1'b0; perf_o.raw_stall = 1'b1; end
      if (ok && stall_waw) begin ok = 1'b0; perf_o.waw_stall = 1'b1; end
      // dependencies between the two instructions of the pair
      if (ok && k == 1 && ib_instr_i[0].rd != 5'd0 &&
          ((in.use_rs1 && in.rs1 == ib_instr_i[0].rd) ||
           (in.use_rs2 && in.rs2 == ib_instr_i[0].rd) ||
           (in.rd == ib_instr_i[0].rd))) begin
        ok = 1'b0; perf_o.pair_stall = 1'b1;
      end
      // loads wait for older stores to commit
      if (ok && in.fu == FU_LOAD && (live_store || (k == 1 && ib_instr_i[0].fu == FU_STORE))) begin
        ok = 1'b0; perf_o.load_wait = 1'b1;
      end
      // without the speculative scoreboard nothing is paired with a control flow
      if (ok && k == 1 && !SPEC_SB_EN && ib_instr_i[0].fu == FU_BRANCH) ok = 1'b0;
      // structural hazards
      if (ok) begin
        unique case (in.fu)
          FU_BRANCH: begin unit[k] = U_BRANCH; ok = !busy[U_BRANCH]; end
          FU_MULT:   begin unit[k] = U_MULT;   ok = !busy[U_MULT];   end
          FU_LOAD, FU_STORE: begin unit[k] = U_LSU; ok = !busy[U_LSU]; end
          default: begin
            if (!busy[U_ALU0])      unit[k] = U_ALU0;
            else if (!busy[U_ALU1]) unit[k] = U_ALU1;
            else ok = 1'b0;
            if (ok && unit[k] == U_ALU1) perf_o.alu1_used = 1'b1;
          end
        endcase
        if (!ok) perf_o.struct_stall = 1'b1;
      end
      if (ok) begin
        issue[k] = 1'b1;
        busy[unit[k]] = 1'b1;
        if (unit[k] inside {U_ALU0, U_BRANCH, U_MULT}) begin
          busy[U_ALU0] = 1'b1; busy[U_BRANCH] = 1'b1; busy[U_MULT] = 1'b1;
        end
        if (fwd1 || fwd2) perf_o.raw_forward = 1'b1;
        if (k == 1 && ib_instr_i[0].fu == FU_BRANCH) perf_o.ctrl_pair = 1'b1;
      end
      fdata[k].op        = in.op;
      fdata[k].a         = in.use_pc ? in.pc : v1;
      fdata[k].b         = in.use_imm ? in.imm : v2;
      fdata[k].imm       = in.imm;
      fdata[k].pc        = in.pc;
      fdata[k].trans_id  = trans_id_t'(sb_issue_id_i[k]);
      fdata[k].bp_taken  = in.bp_taken;
      fdata[k].bp_target = in.bp_target;
      fdata[k].rvc       = in.rvc;
    end
    perf_o.issue0     = issue[0];
    perf_o.dual_issue = issue[0] & issue[1];
  end

  assign issue_o = issue;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      port_valid_o <= '0;
      port_unit_o  <= {ISSUE_WIDTH{U_ALU0}};
      port_data_o  <= '0;
      mult_q       <= 1'b0;
    end else begin
      port_valid_o <= issue;
      port_unit_o  <= unit;
      port_data_o  <= fdata;
      mult_q       <= (issue[0] && unit[0] == U_MULT) || (issue[1] && unit[1] == U_MULT);
    end
  end
endmodule

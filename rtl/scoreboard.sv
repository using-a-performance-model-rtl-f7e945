// scoreboard: circular buffer of issued-but-not-committed instructions.
//
// Up to two instructions are written per cycle at the issue pointer and up to
// two leave per cycle at the commit pointer, both in program order. Each entry
// holds the destination register, the result once a functional unit has
// written it back (the trans_id of a write-back is the entry index), and the
// done and cancelled flags.
//
// Space: instead of counting free entries, the scoreboard checks whether all
// even-index entries are occupied and whether all odd-index entries are.
// Because occupied entries are contiguous in the circular buffer, the AND of
// the two means full (nothing can issue) and the OR means at most one entry is
// free (the second issue port must wait). This needs an even number of
// entries.
//
// Speculative scoreboard: when the branch unit reports a mispredict, the
// entries from the one after the branch up to, but excluding, the issue
// pointer get their cancelled bit set (mask from sb_interval). They stay in
// the buffer: the units still executing them write back into their own
// entries, and the commit stage retires them without touching architectural
// state. Without SPEC_SB_EN no entry is ever cancelled, and the issue stage
// must not issue an instruction in the same cycle as a control flow.
//
// For operand forwarding, view_o shows per entry whether its result is
// available, counting a write-back arriving in this same cycle, and its value.
module scoreboard
  import ss_pkg::*;
#(
  parameter int unsigned N          = NR_SB_ENTRIES,
  parameter bit          SPEC_SB_EN = 1'b1
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  // issue
  input  logic [ISSUE_WIDTH-1:0]      issue_i,      // prefix
  input  instr_t [ISSUE_WIDTH-1:0]    issue_instr_i,
  output logic [ISSUE_WIDTH-1:0][$clog2(N)-1:0] issue_id_o,
  output logic                        full_o,
  output logic                        one_free_o,
  output sb_view_t [N-1:0]            view_o,
  // write-back from the functional units
  input  wb_t [NR_WB_PORTS-1:0]       wb_i,
  // branch resolution
  input  bres_t                       bres_i,
  output logic [N-1:0]                cancelled_o,
  // commit
  output sb_commit_t [NR_COMMIT_PORTS-1:0] commit_o,
  input  logic [NR_COMMIT_PORTS-1:0]  commit_ack_i  // prefix
);
  localparam int unsigned IW = $clog2(N);

  typedef struct packed {
    logic       valid;
    logic       done;
    logic       cancelled;
    logic       is_store;
    xlen_t      pc;
    logic [4:0] rd;
    xlen_t      result;
  } entry_t;

  entry_t         mem_q [N];
  logic [IW-1:0]  issue_ptr_q, commit_ptr_q;

  // ---- space detection from odd and even entries
  logic all_even, all_odd;
  always_comb begin
    all_even = 1'b1;
    all_odd  = 1'b1;
    for (int unsigned i = 0; i < N; i++) begin
      if (i % 2 == 0) all_even &= mem_q[i].valid;
      else            all_odd  &= mem_q[i].valid;
    end
  end
  assign full_o     = all_even & all_odd;
  assign one_free_o = all_even | all_odd;

  for (genvar k = 0; k < ISSUE_WIDTH; k++) begin : g_id
    assign issue_id_o[k] = issue_ptr_q + IW'(k);
  end

  // ---- forwarding view
  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      view_o[i].valid     = mem_q[i].valid;
      view_o[i].cancelled = mem_q[i].cancelled;
      view_o[i].rd        = mem_q[i].rd;
      view_o[i].is_store  = mem_q[i].is_store;
      view_o[i].avail     = mem_q[i].done;
      view_o[i].value     = mem_q[i].result;
      for (int unsigned w = 0; w < NR_WB_PORTS; w++) begin
        if (wb_i[w].valid && wb_i[w].trans_id == IW'(i)) begin
          view_o[i].avail = 1'b1;
          view_o[i].value = wb_i[w].data;
        end
      end
      cancelled_o[i] = mem_q[i].cancelled;
    end
  end

  // ---- cancel mask: entries after the mispredicted branch
  logic [N-1:0] cancel_mask;
  if (SPEC_SB_EN) begin : g_spec
    logic [IW-1:0] after_branch;
    assign after_branch = bres_i.trans_id + 1'b1;
    sb_interval #(.N(N)) i_interval (
      .a_i    (after_branch),
      .b_i    (issue_ptr_q),
      .mask_o (cancel_mask)
    );
  end else begin : g_nospec
    assign cancel_mask = '0;
  end

  // ---- commit view
  for (genvar k = 0; k < NR_COMMIT_PORTS; k++) begin : g_commit
    logic [IW-1:0] idx;
    assign idx = commit_ptr_q + IW'(k);
    assign commit_o[k] = '{valid: mem_q[idx].valid, done: mem_q[idx].done,
                           cancelled: mem_q[idx].cancelled, is_store: mem_q[idx].is_store,
                           pc: mem_q[idx].pc, rd: mem_q[idx].rd, result: mem_q[idx].result};
  end

  logic [1:0] nissue, ncommit;
  always_comb begin
    nissue  = 2'(issue_i[0]) + 2'(issue_i[1]);
    ncommit = 2'(commit_ack_i[0]) + 2'(commit_ack_i[1]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      issue_ptr_q  <= '0;
      commit_ptr_q <= '0;
      for (int i = 0; i < N; i++) mem_q[i] <= '0;
    end else begin
      // write-back
      for (int unsigned w = 0; w < NR_WB_PORTS; w++) begin
        if (wb_i[w].valid) begin
          mem_q[wb_i[w].trans_id].done   <= 1'b1;
          mem_q[wb_i[w].trans_id].result <= wb_i[w].data;
        end
      end
      // partial flush after a mispredict
      if (bres_i.valid && bres_i.mispredict) begin
        for (int unsigned i = 0; i < N; i++)
          if (cancel_mask[i] && mem_q[i].valid) mem_q[i].cancelled <= 1'b1;
      end
      // commit
      for (int unsigned k = 0; k < NR_COMMIT_PORTS; k++)
        if (commit_ack_i[k]) begin
          mem_q[commit_ptr_q + IW'(k)].valid     <= 1'b0;
          mem_q[commit_ptr_q + IW'(k)].cancelled <= 1'b0;
        end
      // issue
      for (int unsigned k = 0; k < ISSUE_WIDTH; k++) begin
        if (issue_i[k]) begin
          mem_q[issue_id_o[k]] <= '{valid: 1'b1, done: 1'b0, cancelled: 1'b0,
                                    is_store: issue_instr_i[k].fu == FU_STORE,
                                    pc: issue_instr_i[k].pc, rd: issue_instr_i[k].rd,
                                    result: '0};
        end
      end
      issue_ptr_q  <= issue_ptr_q + IW'(nissue);
      commit_ptr_q <= commit_ptr_q + IW'(ncommit);
    end
  end

  a_n_even: assert property (@(posedge clk_i) (N % 2 == 0) && (N == (1 << IW)));
  a_issue_room: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                 !(issue_i[0] && full_o) && !(issue_i[1] && one_free_o))
    else $error("scoreboard: issue into an occupied entry");
  a_commit_done: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                  !(commit_ack_i[0] && !(commit_o[0].valid && commit_o[0].done)))
    else $error("scoreboard: commit of an entry that is not done");
  a_prefix: assert property (@(posedge clk_i) disable iff (!rst_ni)
                             !(issue_i[1] && !issue_i[0]) && !(commit_ack_i[1] && !commit_ack_i[0]));
endmodule

// ss_cva6_core: dual-issue, dual-commit CVA6-style core backend.
//
// Fetched instructions (up to two per cycle, 32-bit or RV32C 16-bit, with the
// frontend's prediction) enter the instruction queue; two compressed
// decoders expand the two oldest if they are 16-bit, and two decoders turn
// them into issue buffer entries; the issue stage issues up to two per cycle into the
// scoreboard and to the functional units (two ALUs, branch unit, multiplier,
// load/store unit); results come back on four write-back ports; the commit
// stage retires up to two per cycle into the register file and releases
// stores to memory.
//
// A branch mispredict (reported by the branch unit one cycle after the
// branch issued) flushes the instruction queue and the issue buffer, blocks
// issue for that cycle, asks the frontend to restart at redirect_pc_o, and,
// with SPEC_SB_EN, marks the scoreboard entries younger than the branch as
// cancelled. The frontend (pc generation, branch predictors, instruction
// cache) and the data cache are outside: the fetch and data-memory ports
// connect to them. The data memory returns read data one cycle after the
// request. Instruction timing from issue: ALU and branch write back one cycle
// later, loads, stores and multiplications two; commit follows write-back by
// a cycle at the earliest.
module ss_cva6_core
  import ss_pkg::*;
#(
  parameter int unsigned IQ_DEPTH   = 8,
  parameter bit          SPEC_SB_EN = 1'b1
) (
  input  logic                                clk_i,
  input  logic                                rst_ni,
  // fetch: up to two instructions per cycle, slot 0 older
  input  logic [1:0]                          fetch_valid_i,
  input  fetch_entry_t [1:0]                  fetch_i,
  output logic                                fetch_ready_o,
  // frontend redirect after a branch mispredict
  output logic                                redirect_valid_o,
  output xlen_t                               redirect_pc_o,
  // data memory
  output logic                                dmem_req_o,
  output xlen_t                               dmem_raddr_o,
  input  xlen_t                               dmem_rdata_i,
  output logic                                dmem_we_o,
  output xlen_t                               dmem_waddr_o,
  output xlen_t                               dmem_wdata_o,
  output logic [3:0]                          dmem_be_o,
  // retirement trace and issue-stage events
  output commit_trace_t [NR_COMMIT_PORTS-1:0] commit_o,
  output issue_perf_t                         perf_o
);
  localparam int unsigned N = NR_SB_ENTRIES;

  bres_t bres;
  logic  flush;
  assign flush            = bres.valid && bres.mispredict;
  assign redirect_valid_o = flush;
  assign redirect_pc_o    = bres.target;

  // ---------------- instruction queue and decode
  logic [1:0]         iq_head_valid, iq_pop;
  fetch_entry_t [1:0] iq_head;
  logic [1:0]         ib_room;
  instr_t [1:0]       dec;
  logic [1:0][ILEN-1:0] c_instr;

  instr_queue #(.DEPTH(IQ_DEPTH)) i_iq (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .flush_i      (flush),
    .push_i       (fetch_valid_i & {2{fetch_ready_o}}),
    .push_data_i  (fetch_i),
    .push_ready_o (fetch_ready_o),
    .head_valid_o (iq_head_valid),
    .head_o       (iq_head),
    .pop_i        (iq_pop)
  );

  fetch_entry_t [1:0] expanded;
  logic [1:0]         is_rvc, c_illegal;
  for (genvar k = 0; k < 2; k++) begin : g_dec
    always_comb begin
      expanded[k]       = iq_head[k];
      expanded[k].instr = c_instr[k];
    end
    compressed_decoder i_cdec (.instr_i(iq_head[k].instr), .instr_o(c_instr[k]),
                               .is_compressed_o(is_rvc[k]), .illegal_o(c_illegal[k]));
    decoder i_dec (.fetch_i(expanded[k]), .is_compressed_i(is_rvc[k]), .c_illegal_i(c_illegal[k]),
                   .instr_o(dec[k]));
  end

  assign iq_pop[0] = iq_head_valid[0] && ib_room >= 2'd1 && !flush;
  assign iq_pop[1] = iq_head_valid[1] && ib_room == 2'd2 && !flush;

  // ---------------- issue
  logic [1:0]   ib_valid, issue;
  instr_t [1:0] ib_instr;

  issue_buffer i_ib (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .flush_i     (flush),
    .in_valid_i  (iq_pop),
    .in_data_i   (dec),
    .in_room_o   (ib_room),
    .out_valid_o (ib_valid),
    .out_data_o  (ib_instr),
    .ack_i       (issue)
  );

  logic                    sb_full, sb_one_free;
  sb_view_t [N-1:0]        sb_view;
  logic [1:0][$clog2(N)-1:0] sb_issue_id;
  logic [N-1:0]            sb_cancelled;
  wb_t [NR_WB_PORTS-1:0]   wb;
  sb_commit_t [1:0]        sb_commit;
  logic [1:0]              commit_ack;

  logic [NR_RF_RPORTS-1:0][4:0] rf_raddr;
  xlen_t [NR_RF_RPORTS-1:0]     rf_rdata;
  logic [1:0]                   rf_we;
  logic [1:0][4:0]              rf_waddr;
  xlen_t [1:0]                  rf_wdata;

  logic [1:0]     port_valid;
  unit_t [1:0]    port_unit;
  fu_data_t [1:0] port_data;

  issue_read_operands #(.N(N), .SPEC_SB_EN(SPEC_SB_EN)) i_iro (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .flush_i       (flush),
    .ib_valid_i    (ib_valid),
    .ib_instr_i    (ib_instr),
    .issue_o       (issue),
    .sb_full_i     (sb_full),
    .sb_one_free_i (sb_one_free),
    .sb_view_i     (sb_view),
    .sb_issue_id_i (sb_issue_id),
    .rf_raddr_o    (rf_raddr),
    .rf_rdata_i    (rf_rdata),
    .port_valid_o  (port_valid),
    .port_unit_o   (port_unit),
    .port_data_o   (port_data),
    .perf_o        (perf_o)
  );

  scoreboard #(.N(N), .SPEC_SB_EN(SPEC_SB_EN)) i_sb (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .issue_i       (issue),
    .issue_instr_i (ib_instr),
    .issue_id_o    (sb_issue_id),
    .full_o        (sb_full),
    .one_free_o    (sb_one_free),
    .view_o        (sb_view),
    .wb_i          (wb),
    .bres_i        (bres),
    .cancelled_o   (sb_cancelled),
    .commit_o      (sb_commit),
    .commit_ack_i  (commit_ack)
  );

  regfile i_rf (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .raddr_i (rf_raddr),
    .rdata_o (rf_rdata),
    .we_i    (rf_we),
    .waddr_i (rf_waddr),
    .wdata_i (rf_wdata)
  );

  // ---------------- execute
  logic commit_store, discard_store, sq_empty;

  ex_stage i_ex (
    .clk_i           (clk_i),
    .rst_ni          (rst_ni),
    .port_valid_i    (port_valid),
    .port_unit_i     (port_unit),
    .port_data_i     (port_data),
    .sb_cancelled_i  (sb_cancelled),
    .wb_o            (wb),
    .bres_o          (bres),
    .commit_store_i  (commit_store),
    .discard_store_i (discard_store),
    .sq_empty_o      (sq_empty),
    .dmem_req_o      (dmem_req_o),
    .dmem_raddr_o    (dmem_raddr_o),
    .dmem_rdata_i    (dmem_rdata_i),
    .dmem_we_o       (dmem_we_o),
    .dmem_waddr_o    (dmem_waddr_o),
    .dmem_wdata_o    (dmem_wdata_o),
    .dmem_be_o       (dmem_be_o)
  );

  // ---------------- commit
  commit_stage i_commit (
    .sb_i            (sb_commit),
    .ack_o           (commit_ack),
    .rf_we_o         (rf_we),
    .rf_waddr_o      (rf_waddr),
    .rf_wdata_o      (rf_wdata),
    .commit_store_o  (commit_store),
    .discard_store_o (discard_store),
    .commit_o        (commit_o)
  );

  // an empty scoreboard leaves no store behind in the queue
  a_sq_drained: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                 !(sb_view[0].valid || sb_view[1].valid || sb_view[2].valid ||
                                   sb_view[3].valid) |-> sq_empty);
endmodule

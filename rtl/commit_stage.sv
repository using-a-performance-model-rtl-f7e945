// commit_stage: in-order retirement of up to two instructions per cycle.
//
// Port 0 retires the oldest scoreboard entry once it is done; port 1 retires
// the next one in the same cycle only if port 0 retires and that entry is
// done and is not a store: only the first commit port commits stores, which
// keeps one store release per cycle towards the load/store unit. A retired
// entry writes its result into the register file (if it has a destination)
// and a retired store releases the head of the store queue to memory. A
// cancelled entry (on the wrong path of a mispredicted branch) is only
// acknowledged: no register is written and a cancelled store is discarded
// from the store queue. Combinational; commit_o is a trace of what retired,
// for verification.
module commit_stage
  import ss_pkg::*;
(
  input  sb_commit_t [NR_COMMIT_PORTS-1:0]    sb_i,
  output logic [NR_COMMIT_PORTS-1:0]          ack_o,
  output logic [NR_COMMIT_PORTS-1:0]          rf_we_o,
  output logic [NR_COMMIT_PORTS-1:0][4:0]     rf_waddr_o,
  output xlen_t [NR_COMMIT_PORTS-1:0]         rf_wdata_o,
  output logic                                commit_store_o,
  output logic                                discard_store_o,
  output commit_trace_t [NR_COMMIT_PORTS-1:0] commit_o
);
  always_comb begin
    ack_o[0] = sb_i[0].valid && sb_i[0].done;
    ack_o[1] = ack_o[0] && sb_i[1].valid && sb_i[1].done && !sb_i[1].is_store;
    commit_store_o  = ack_o[0] && sb_i[0].is_store && !sb_i[0].cancelled;
    discard_store_o = ack_o[0] && sb_i[0].is_store &&  sb_i[0].cancelled;
    for (int unsigned k = 0; k < NR_COMMIT_PORTS; k++) begin
      rf_we_o[k]    = ack_o[k] && !sb_i[k].cancelled && sb_i[k].rd != 5'd0;
      rf_waddr_o[k] = sb_i[k].rd;
      rf_wdata_o[k] = sb_i[k].result;
      commit_o[k]   = '{valid: ack_o[k], cancelled: sb_i[k].cancelled, pc: sb_i[k].pc,
                        rd: sb_i[k].rd, we: rf_we_o[k], wdata: sb_i[k].result};
    end
  end
endmodule

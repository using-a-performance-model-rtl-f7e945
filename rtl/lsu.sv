// lsu: load/store unit with a store queue released by the commit stage.
//
// Loads: in the cycle after issue the unit adds base and offset and sends a
// word read to the data memory, which answers one cycle later (the
// one-cycle cache latency the core is evaluated with); the byte or halfword is
// then extracted, extended and written back on the load port. Issue to
// write-back is two cycles.
// Stores: in the cycle after issue the address, byte enables and aligned data
// go into the store queue; the store writes back on the store port one cycle
// later (two cycles, as for loads), which only marks its scoreboard entry
// done. Memory is written when the first commit port commits the store
// (commit_store_i); a cancelled store is dropped (discard_store_i). Stores
// reach the queue in program order, so the head is always the store being
// committed. Accesses are assumed naturally aligned. The issue stage holds
// loads while an older store is uncommitted, so a load never needs to search
// the queue. One instruction per cycle.
module lsu
  import ss_pkg::*;
#(
  parameter int unsigned SQ_DEPTH = NR_SB_ENTRIES
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        valid_i,
  input  fu_data_t    data_i,
  input  logic        commit_store_i,
  input  logic        discard_store_i,
  // data memory read port, data one cycle after the request
  output logic        dmem_req_o,
  output xlen_t       dmem_raddr_o,
  input  xlen_t       dmem_rdata_i,
  // data memory write port
  output logic        dmem_we_o,
  output xlen_t       dmem_waddr_o,
  output xlen_t       dmem_wdata_o,
  output logic [3:0]  dmem_be_o,
  output wb_t         load_wb_o,
  output wb_t         store_wb_o,
  output logic        sq_empty_o
);
  typedef struct packed {
    xlen_t      addr;
    xlen_t      data;
    logic [3:0] be;
  } sq_entry_t;

  localparam int unsigned PW = (SQ_DEPTH > 1) ? $clog2(SQ_DEPTH) : 1;

  sq_entry_t        sq_q [SQ_DEPTH];
  logic [PW-1:0]    rd_ptr_q, wr_ptr_q;
  logic [PW:0]      cnt_q;

  logic is_load, is_store;
  xlen_t addr;
  assign is_load  = valid_i && (data_i.op inside {OP_LB, OP_LH, OP_LW, OP_LBU, OP_LHU});
  assign is_store = valid_i && (data_i.op inside {OP_SB, OP_SH, OP_SW});
  assign addr     = data_i.a + data_i.imm;

  // load request
  assign dmem_req_o   = is_load;
  assign dmem_raddr_o = {addr[XLEN-1:2], 2'b00};

  // load response stage
  logic      ld_v_q;
  trans_id_t ld_id_q;
  op_t       ld_op_q;
  logic [1:0] ld_off_q;
  // store write-back stage
  logic      st_v_q;
  trans_id_t st_id_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ld_v_q <= 1'b0; ld_id_q <= '0; ld_op_q <= OP_LW; ld_off_q <= '0;
      st_v_q <= 1'b0; st_id_q <= '0;
    end else begin
      ld_v_q <= is_load;
      st_v_q <= is_store;
      if (is_load) begin
        ld_id_q  <= data_i.trans_id;
        ld_op_q  <= data_i.op;
        ld_off_q <= addr[1:0];
      end
      if (is_store) st_id_q <= data_i.trans_id;
    end
  end

  xlen_t sh, ld_data;
  always_comb begin
    sh = dmem_rdata_i >> (8 * ld_off_q);
    unique case (ld_op_q)
      OP_LB:   ld_data = {{24{sh[7]}}, sh[7:0]};
      OP_LBU:  ld_data = {24'b0, sh[7:0]};
      OP_LH:   ld_data = {{16{sh[15]}}, sh[15:0]};
      OP_LHU:  ld_data = {16'b0, sh[15:0]};
      default: ld_data = dmem_rdata_i;
    endcase
  end
  assign load_wb_o  = '{valid: ld_v_q, trans_id: ld_id_q, data: ld_data};
  assign store_wb_o = '{valid: st_v_q, trans_id: st_id_q, data: '0};

  // store queue
  sq_entry_t st_new;
  always_comb begin
    st_new.addr = {addr[XLEN-1:2], 2'b00};
    st_new.data = data_i.b << (8 * addr[1:0]);
    unique case (data_i.op)
      OP_SB:   st_new.be = 4'b0001 << addr[1:0];
      OP_SH:   st_new.be = 4'b0011 << addr[1:0];
      default: st_new.be = 4'b1111;
    endcase
  end

  logic pop;
  assign pop = commit_store_i | discard_store_i;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr_q <= '0; wr_ptr_q <= '0; cnt_q <= '0;
    end else begin
      if (is_store) begin
        sq_q[wr_ptr_q] <= st_new;
        wr_ptr_q <= (wr_ptr_q == PW'(SQ_DEPTH - 1)) ? '0 : wr_ptr_q + 1'b1;
      end
      if (pop) rd_ptr_q <= (rd_ptr_q == PW'(SQ_DEPTH - 1)) ? '0 : rd_ptr_q + 1'b1;
      cnt_q <= cnt_q + (PW+1)'(is_store) - (PW+1)'(pop);
    end
  end

  assign dmem_we_o    = commit_store_i;
  assign dmem_waddr_o = sq_q[rd_ptr_q].addr;
  assign dmem_wdata_o = sq_q[rd_ptr_q].data;
  assign dmem_be_o    = sq_q[rd_ptr_q].be;
  assign sq_empty_o   = (cnt_q == '0);

  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                  !(is_store && !pop && cnt_q == (PW+1)'(SQ_DEPTH)))
    else $error("lsu: store queue overflow");
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                   !(pop && cnt_q == '0))
    else $error("lsu: store committed with an empty store queue");
  a_one_pop: assert property (@(posedge clk_i) disable iff (!rst_ni)
                              !(commit_store_i && discard_store_i));
endmodule

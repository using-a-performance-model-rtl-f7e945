// ss_pkg: types and constants shared by the dual-issue CVA6-style backend.
//
// The backend issues and commits up to two instructions per cycle (issue width
// and commit width both 2, as chosen from the performance model). Instructions
// are 32-bit RV32IM with the Zba, Zbb, Zbc and Zbs bit-manipulation
// extensions; the data path is 32 bits wide, as in the embedded
// cv32a6_imac_sv0 configuration the design is evaluated in. The scoreboard
// size of 4 entries is this design's reading of "the embedded little
// scoreboard"; it must be a power of two and even, because fullness is
// detected from the odd and the even entries separately.
//
// Functional units and write-back ports: ALU0, the branch unit and the
// multiplier share the fixed-latency write-back port; loads and stores each
// have one; the second ALU (ALU1) uses the port that belongs to the FPU in the
// single-issue core. Latencies counted from the issue cycle: ALU and branch 1,
// multiplier, load and store 2.
package ss_pkg;

  parameter int unsigned XLEN            = 32;
  parameter int unsigned ILEN            = 32;
  parameter int unsigned NR_SB_ENTRIES   = 4;
  parameter int unsigned TRANS_ID_BITS   = $clog2(NR_SB_ENTRIES);
  parameter int unsigned ISSUE_WIDTH     = 2;
  parameter int unsigned NR_COMMIT_PORTS = 2;
  parameter int unsigned NR_WB_PORTS     = 4;
  parameter int unsigned NR_RF_RPORTS    = 2 * ISSUE_WIDTH;

  // write-back port numbers
  parameter int unsigned WB_FLU   = 0;  // ALU0, branch unit, multiplier
  parameter int unsigned WB_LOAD  = 1;
  parameter int unsigned WB_STORE = 2;
  parameter int unsigned WB_FPU   = 3;  // second ALU (no FPU in this design)

  typedef logic [XLEN-1:0]          xlen_t;
  typedef logic [TRANS_ID_BITS-1:0] trans_id_t;

  // functional unit class an instruction needs (decoder output)
  typedef enum logic [2:0] {
    FU_NONE, FU_ALU, FU_BRANCH, FU_MULT, FU_LOAD, FU_STORE
  } fu_t;

  // physical unit an issue port is steered to
  typedef enum logic [2:0] {
    U_ALU0, U_ALU1, U_BRANCH, U_MULT, U_LSU
  } unit_t;
  parameter int unsigned NR_UNITS = 5;

  typedef enum logic [5:0] {
    // ALU
    OP_ADD, OP_SUB, OP_SLL, OP_SLT, OP_SLTU, OP_XOR, OP_SRL, OP_SRA, OP_OR, OP_AND,
    // ALU, bit manipulation (Zba, Zbb, Zbs)
    OP_SH1ADD, OP_SH2ADD, OP_SH3ADD,
    OP_ANDN, OP_ORN, OP_XNOR, OP_CLZ, OP_CTZ, OP_CPOP, OP_MAX, OP_MAXU, OP_MIN, OP_MINU,
    OP_SEXTB, OP_SEXTH, OP_ZEXTH, OP_ROL, OP_ROR, OP_ORCB, OP_REV8,
    OP_BCLR, OP_BEXT, OP_BINV, OP_BSET,
    // branch unit
    OP_BEQ, OP_BNE, OP_BLT, OP_BGE, OP_BLTU, OP_BGEU, OP_JAL, OP_JALR,
    // multiplier
    OP_MUL, OP_MULH, OP_MULHSU, OP_MULHU,
    // multiplier, carry-less (Zbc)
    OP_CLMUL, OP_CLMULH, OP_CLMULR,
    // load/store unit
    OP_LB, OP_LH, OP_LW, OP_LBU, OP_LHU, OP_SB, OP_SH, OP_SW
  } op_t;

  // one fetched instruction, with the frontend's prediction
  typedef struct packed {
    xlen_t            pc;
    logic [ILEN-1:0]  instr;
    logic             bp_taken;
    xlen_t            bp_target;
  } fetch_entry_t;

  // one decoded instruction (issue buffer entry)
  typedef struct packed {
    xlen_t      pc;
    fu_t        fu;
    op_t        op;
    logic [4:0] rs1;
    logic [4:0] rs2;
    logic [4:0] rd;       // 0: no register result
    logic       use_rs1;
    logic       use_rs2;
    logic       use_imm;  // operand b is the immediate
    logic       use_pc;   // operand a is the pc
    xlen_t      imm;
    logic       bp_taken;
    xlen_t      bp_target;
    logic       illegal;
    logic       rvc;      // expanded from a 16-bit compressed instruction
  } instr_t;

  // what an issue port hands to a functional unit
  typedef struct packed {
    op_t       op;
    xlen_t     a;
    xlen_t     b;
    xlen_t     imm;
    xlen_t     pc;
    trans_id_t trans_id;
    logic      bp_taken;
    xlen_t     bp_target;
    logic      rvc;       // compressed: the next sequential pc is pc+2
  } fu_data_t;

  typedef struct packed {
    logic      valid;
    trans_id_t trans_id;
    xlen_t     data;
  } wb_t;

  // branch resolution
  typedef struct packed {
    logic      valid;
    logic      mispredict;
    trans_id_t trans_id;
    xlen_t     target;  // correct next pc
  } bres_t;

  // view of one scoreboard entry for forwarding and hazard checks
  typedef struct packed {
    logic       valid;      // issued, not yet committed
    logic       cancelled;
    logic [4:0] rd;
    logic       is_store;
    logic       avail;      // result in the entry or on a write-back port now
    xlen_t      value;
  } sb_view_t;

  // entry presented to a commit port
  typedef struct packed {
    logic       valid;
    logic       done;
    logic       cancelled;
    logic       is_store;
    xlen_t      pc;
    logic [4:0] rd;
    xlen_t      result;
  } sb_commit_t;

  // retired instruction, one per commit port
  typedef struct packed {
    logic       valid;
    logic       cancelled;
    xlen_t      pc;
    logic [4:0] rd;
    logic       we;
    xlen_t      wdata;
  } commit_trace_t;

  // events of the issue stage, one bit per cycle each
  typedef struct packed {
    logic issue0;          // port 0 issued
    logic dual_issue;      // both ports issued
    logic raw_forward;     // an operand was forwarded from the scoreboard
    logic raw_stall;       // an operand was not yet available
    logic waw_stall;
    logic pair_stall;      // port 1 held by a dependency on port 0
    logic struct_stall;    // unit or write-back port busy
    logic alu1_used;       // an ALU instruction went to the second ALU
    logic sb_full;
    logic sb_one_free;     // only one entry left: single issue
    logic load_wait;       // load held behind an uncommitted store
    logic ctrl_pair;       // instruction issued together with a control flow
  } issue_perf_t;

endpackage

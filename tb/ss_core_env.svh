// ss_core_env.svh: test environment for the core, included into the body of
// a testbench module after it has declared IMEM_WORDS, DMEM_WORDS and DBASE.
//
// It declares the signals of the core's ports (the including module
// instantiates ss_cva6_core on them, as dut) and provides:
// - the clock, the instruction memory (imem, word array) and a data memory
//   that answers reads one cycle after the request;
// - a frontend model that fetches up to two instructions per cycle (32-bit,
//   or 16-bit compressed ones whose expansion the program writer records in
//   cexp) from an aligned 64-bit block, predicts JAL and backward or
//   compressed branches taken and everything else not taken, and restarts
//   at the core's redirect address;
// - a reference instruction-set model (iss_step) with its own register file
//   and data memory copy, written independently of the RTL;
// - a commit checker that steps the reference model for every non-cancelled
//   retirement and compares pc, destination and value;
// - run_program: resets the core, loads data memory from dinit, runs until
//   the instruction at end_pc retires, and compares data memory with the
//   reference copy.
// Test programs are written into imem with emit() at word pc_w.
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;

  // ---------------- DUT
  logic [1:0]         fetch_valid;
  fetch_entry_t [1:0] fetch;
  logic               fetch_ready, redirect_valid;
  xlen_t              redirect_pc;
  logic               dmem_req, dmem_we;
  xlen_t              dmem_raddr, dmem_rdata, dmem_waddr, dmem_wdata;
  logic [3:0]         dmem_be;
  commit_trace_t [1:0] commit;
  issue_perf_t        perf;

  // the including module instantiates ss_cva6_core as dut on these signals

  // ---------------- memories
  logic [31:0] imem [IMEM_WORDS];
  logic [31:0] dmem [DMEM_WORDS];
  logic [31:0] dinit [DMEM_WORDS];   // initial data memory of the next run
  always_ff @(posedge clk) begin
    if (dmem_req) dmem_rdata <= dmem[(dmem_raddr - DBASE) >> 2];
    if (dmem_we)
      for (int b = 0; b < 4; b++)
        if (dmem_be[b]) dmem[(dmem_waddr - DBASE) >> 2][8*b +: 8] <= dmem_wdata[8*b +: 8];
  end

  // expansion of the compressed instruction at each halfword (from the generator)
  logic [31:0] cexp [2*IMEM_WORDS];
  int          n_rvc = 0;

  // ---------------- frontend model
  xlen_t fpc;
  function automatic logic [15:0] hw(input xlen_t a);
    logic [31:0] w = imem[(a >> 2) % IMEM_WORDS];
    return a[1] ? w[31:16] : w[15:0];
  endfunction
  // raw bits at a (a compressed one in the low half) and the instruction length
  function automatic logic [31:0] raw_at(input xlen_t a, output xlen_t len);
    logic [31:0] r = {hw(a + 2), hw(a)};
    len = (r[1:0] == 2'b11) ? 4 : 2;
    return r;
  endfunction
  function automatic void predict(input xlen_t pc, output logic taken, output xlen_t tgt,
                                  output xlen_t len);
    logic [31:0] ins;
    ins = raw_at(pc, len);
    if (len == 2) ins = cexp[(pc >> 1) % (2 * IMEM_WORDS)];
    taken = 1'b0; tgt = pc + len;
    if (ins[6:0] == 7'b1101111) begin
      taken = 1'b1;
      tgt = pc + {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};
    end else if (ins[6:0] == 7'b1100011 && (ins[31] || len == 2)) begin
      taken = 1'b1;
      tgt = pc + {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
    end
  endfunction

  logic  t0, t1;
  xlen_t g0, g1, l0, l1, fpc_next;
  logic [31:0] r0, r1;
  always_comb begin
    predict(fpc, t0, g0, l0);
    predict(fpc + l0, t1, g1, l1);
    r0 = raw_at(fpc, l0);
    r1 = raw_at(fpc + l0, l1);
    fetch[0] = '{pc: fpc, instr: r0, bp_taken: t0, bp_target: g0};
    fetch[1] = '{pc: fpc + l0, instr: r1, bp_taken: t1, bp_target: g1};
    fetch_valid = {!t0 && ({29'b0, fpc[2:0]} + l0 + l1 <= 8), 1'b1} & {2{rst_n}};
    if (t0)                   fpc_next = g0;
    else if (!fetch_valid[1]) fpc_next = fpc + l0;
    else if (t1)              fpc_next = g1;
    else                      fpc_next = fpc + l0 + l1;
  end
  always_ff @(posedge clk) begin
    if (!rst_n)              fpc <= '0;
    else if (redirect_valid) fpc <= redirect_pc;
    else if (fetch_ready)    fpc <= fpc_next;
  end

  // ---------------- reference model
  logic [31:0] gr [32];
  logic [31:0] gm [DMEM_WORDS];
  logic [31:0] gpc;
  logic [31:0] end_pc;

  // bit-manipulation reference: sets hit if ins is a Zba/Zbb/Zbc/Zbs instruction
  function automatic void zb_ref(input logic [31:0] ins, a, b, output logic hit, output logic [31:0] v);
    logic        imm = (ins[6:0] == 7'b0010011);
    logic [6:0]  f7 = ins[31:25];
    logic [2:0]  f3 = ins[14:12];
    logic [4:0]  sh = imm ? ins[24:20] : b[4:0];
    logic [63:0] cl = '0;
    hit = 1'b1; v = '0;
    for (int i = 0; i < 32; i++) if (b[i]) cl ^= 64'(a) << i;
    if (!(ins[6:0] inside {7'b0010011, 7'b0110011}) || (imm && !(f3 inside {3'b001, 3'b101})))
      hit = 1'b0;
    else if (imm && f3 == 3'b001 && f7 == 7'b0110000) begin
      case (ins[24:20])
        5'd0: begin v = 32; for (int i = 0; i < 32; i++) if (a[i]) v = 31 - i; end
        5'd1: begin v = 32; for (int i = 31; i >= 0; i--) if (a[i]) v = i; end
        5'd2: for (int i = 0; i < 32; i++) v += a[i];
        5'd4: v = {{24{a[7]}}, a[7:0]};
        default: v = {{16{a[15]}}, a[15:0]};
      endcase
    end
    else if (imm && f3 == 3'b101 && ins[31:20] == 12'h287)
      for (int i = 0; i < 4; i++) v[8*i +: 8] = {8{|a[8*i +: 8]}};
    else if (imm && f3 == 3'b101 && ins[31:20] == 12'h698) v = {a[7:0], a[15:8], a[23:16], a[31:24]};
    else if (!imm && f7 == 7'b0000100) v = {16'b0, a[15:0]};
    else if (!imm && f7 == 7'b0010000) v = (a << f3[2:1]) + b;
    else if (!imm && f7 == 7'b0100000 && f3 == 3'b111) v = a & ~b;
    else if (!imm && f7 == 7'b0100000 && f3 == 3'b110) v = a | ~b;
    else if (!imm && f7 == 7'b0100000 && f3 == 3'b100) v = a ^ ~b;
    else if (!imm && f7 == 7'b0000101) begin
      case (f3)
        3'b001: v = cl[31:0];
        3'b010: v = cl[62:31];
        3'b011: v = cl[63:32];
        3'b100: v = ($signed(a) < $signed(b)) ? a : b;
        3'b101: v = (a < b) ? a : b;
        3'b110: v = ($signed(a) < $signed(b)) ? b : a;
        default: v = (a < b) ? b : a;
      endcase
    end
    else if (f7 == 7'b0110000) v = (f3 == 3'b001) ? ((a << sh) | (a >> (6'd32 - sh))) :
                                                    ((a >> sh) | (a << (6'd32 - sh)));
    else if (f7 == 7'b0100100) v = (f3 == 3'b001) ? (a & ~(32'd1 << sh)) : 32'((a >> sh) & 1);
    else if (f7 == 7'b0110100) v = a ^ (32'd1 << sh);
    else if (f7 == 7'b0010100) v = a | (32'd1 << sh);
    else hit = 1'b0;
  endfunction

  // executes one instruction; returns destination and value written
  function automatic void iss_step(output logic [4:0] rd, output logic [31:0] val);
    logic [31:0] ins, a, b, ii, si, bi, nxt, addr, w, len;
    logic [63:0] p;
    logic [4:0] r;
    ins = raw_at(gpc, len);
    if (len == 2) begin ins = cexp[gpc >> 1]; n_rvc++; end
    r  = ins[11:7];
    a  = gr[ins[19:15]]; b = gr[ins[24:20]];
    ii = {{20{ins[31]}}, ins[31:20]};
    si = {{20{ins[31]}}, ins[31:25], ins[11:7]};
    bi = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
    nxt = gpc + len; rd = 0; val = 0;
    case (ins[6:0])
      7'b0110111: begin rd = r; val = {ins[31:12], 12'b0}; end
      7'b0010111: begin rd = r; val = gpc + {ins[31:12], 12'b0}; end
      7'b1101111: begin rd = r; val = gpc + len;
                        nxt = gpc + {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0}; end
      7'b1100111: begin rd = r; val = gpc + len; nxt = (a + ii) & ~32'd1; end
      7'b1100011: begin
        logic tk;
        case (ins[14:12])
          3'b000: tk = a == b;
          3'b001: tk = a != b;
          3'b100: tk = $signed(a) < $signed(b);
          3'b101: tk = $signed(a) >= $signed(b);
          3'b110: tk = a < b;
          default: tk = a >= b;
        endcase
        if (tk) nxt = gpc + bi;
      end
      7'b0000011: begin
        addr = a + ii; w = gm[(addr - DBASE) >> 2] >> (8 * addr[1:0]); rd = r;
        case (ins[14:12])
          3'b000: val = {{24{w[7]}}, w[7:0]};
          3'b001: val = {{16{w[15]}}, w[15:0]};
          3'b100: val = {24'b0, w[7:0]};
          3'b101: val = {16'b0, w[15:0]};
          default: val = w;
        endcase
      end
      7'b0100011: begin
        addr = a + si;
        case (ins[14:12])
          3'b000: gm[(addr - DBASE) >> 2][8*addr[1:0] +: 8] = b[7:0];
          3'b001: gm[(addr - DBASE) >> 2][8*addr[1:0] +: 16] = b[15:0];
          default: gm[(addr - DBASE) >> 2] = b;
        endcase
      end
      7'b0010011, 7'b0110011: begin
        logic [31:0] op2;
        logic zb; logic [31:0] zv;
        rd = r;
        op2 = (ins[6:0] == 7'b0010011) ? ii : b;
        zb_ref(ins, a, b, zb, zv);
        if (zb) val = zv;
        else if (ins[6:0] == 7'b0110011 && ins[31:25] == 7'b0000001) begin
          case (ins[14:12])
            3'b000: begin p = {{32{1'b0}}, a} * {{32{1'b0}}, b}; val = p[31:0]; end
            3'b001: begin p = $signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b}); val = p[63:32]; end
            3'b010: begin p = 64'($signed({{32{a[31]}}, a}) * $signed({32'b0, b})); val = p[63:32]; end
            default: begin p = {32'b0, a} * {32'b0, b}; val = p[63:32]; end
          endcase
        end else begin
          case (ins[14:12])
            3'b000: val = (ins[6:0] == 7'b0110011 && ins[30]) ? a - op2 : a + op2;
            3'b001: val = a << op2[4:0];
            3'b010: val = {31'b0, $signed(a) < $signed(op2)};
            3'b011: val = {31'b0, a < op2};
            3'b100: val = a ^ op2;
            3'b101: val = ins[30] ? 32'($signed(a) >>> op2[4:0]) : a >> op2[4:0];
            3'b110: val = a | op2;
            default: val = a & op2;
          endcase
        end
      end
      default: ;
    endcase
    if (rd != 0) gr[rd] = val;
    gpc = nxt;
  endfunction


  // ---------------- program generation
  int pc_w;
  function automatic void emit(input logic [31:0] ins);
    imem[pc_w] = ins; pc_w++;
  endfunction

  // ---------------- commit checker
  logic running;
  bit   finished;
  longint first_commit, last_commit;
  int   ncommitted;
  always @(posedge clk) if (rst_n && running) begin
    for (int k = 0; k < 2; k++) begin
      if (commit[k].valid && !commit[k].cancelled && !finished) begin
        logic [4:0]  erd;
        logic [31:0] ev;
        logic [31:0] epc;
        epc = gpc;
        iss_step(erd, ev);
        checks++;
        if (commit[k].pc != epc || (erd != 0 && (!commit[k].we || commit[k].rd != erd ||
                                    commit[k].wdata != ev)) || (erd == 0 && commit[k].we)) begin
          failures++;
          if (failures < 10)
            $display("MISMATCH instr %h", imem[epc >> 2]);
        if (failures < 10)
            $display("MISMATCH cycle %0d port %0d: pc %h (exp %h) rd %0d we %0b data %h (exp rd %0d %h)",
                     cycle, k, commit[k].pc, epc, commit[k].rd, commit[k].we, commit[k].wdata, erd, ev);
        end
        if (ncommitted == 0) first_commit = cycle;
        last_commit = cycle;
        ncommitted++;
        if (epc == end_pc) finished = 1'b1;
      end
    end
  end
  always_ff @(posedge clk) cycle <= cycle + 1;

  task automatic run_program(input int max_cycles, output longint cycles_used);
    longint start;
    for (int i = 0; i < DMEM_WORDS; i++) begin dmem[i] = dinit[i]; gm[i] = dinit[i]; end
    for (int i = 0; i < 32; i++) gr[i] = 0;
    gpc = 0; finished = 0; ncommitted = 0; running = 1'b0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1; running = 1'b1;
    start = cycle;
    while (!finished && cycle - start < max_cycles) @(posedge clk);
    repeat (4) @(posedge clk);
    running = 1'b0;
    checks++;
    if (!finished) begin failures++; $display("program did not finish"); end
    for (int i = 0; i < DMEM_WORDS; i++) begin
      checks++;
      if (dmem[i] !== gm[i]) begin
        failures++;
        if (failures < 10) $display("MEM MISMATCH word %0d: %h exp %h", i, dmem[i], gm[i]);
      end
    end
    cycles_used = cycle - start;
  endtask


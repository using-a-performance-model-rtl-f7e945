// ss_kernels.svh: the three CoreMark-style kernels for the core tests,
// included after ss_core_env.svh and the core instance. Each gen_* function
// writes one program into instruction memory; run_kernels loads random input
// data, runs the three programs one after the other, compares each stored
// result with a value computed here from the same data, and checks the
// retirement rate of each against a lower bound given by the caller (in
// hundredths of an instruction per cycle).
//   crc16:  CoreMark's bit-serial CRC-16 over 32 bytes (data at +0x000,
//           result at +0x3f0); one data-dependent branch per bit;
//   matmul: 4x4 word matrix product (A +0x100, B +0x140, C +0x180), using
//           MUL and SH2ADD;
//   list:   walk of a 16-node list in random order (nodes {next, value} at
//           +0x200, head at +0x3e0; sum/count/max at +0x3f4/+0x3f8/+0x3fc),
//           using MAX.
// Offsets are from the data base DBASE. Needs DMEM_WORDS >= 256 and
// IMEM_WORDS >= 64.
  localparam logic [6:0] OPI = 7'b0010011, OPR = 7'b0110011;
  function automatic logic [31:0] andi(input logic [4:0] rd, rs1, input logic [11:0] imm);
    return i_type(imm, rs1, 3'b111, rd, OPI);
  endfunction
  function automatic logic [31:0] srli(input logic [4:0] rd, rs1, input logic [4:0] sh);
    return i_type({7'b0, sh}, rs1, 3'b101, rd, OPI);
  endfunction
  function automatic logic [31:0] xor_(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0, rs2, rs1, 3'b100, rd, OPR);
  endfunction
  function automatic logic [31:0] or_(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0, rs2, rs1, 3'b110, rd, OPR);
  endfunction
  function automatic logic [31:0] lbu(input logic [4:0] rd, rs1, input logic [11:0] imm);
    return i_type(imm, rs1, 3'b100, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] sh2add(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0010000, rs2, rs1, 3'b100, rd, OPR);
  endfunction
  function automatic logic [31:0] max_(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0000101, rs2, rs1, 3'b110, rd, OPR);
  endfunction
  function automatic logic [12:0] to(input int target);  // branch offset to a word index
    return 13'((target - pc_w) * 4);
  endfunction

  function automatic void start_program();
    pc_w = 0;
    for (int i = 0; i < IMEM_WORDS; i++) imem[i] = addi(0, 0, 0);
    emit(lui(1, 20'(DBASE >> 12)));            // x1 = data base
  endfunction
  function automatic void end_program();
    end_pc = pc_w * 4;
    emit(jal(0, 21'd0));
  endfunction

  // ---------------- crc16 (data bytes at +0x000, result at +0x3f0)
  localparam int CRC_BYTES = 32;
  function automatic logic [15:0] crcu8(input logic [7:0] data, input logic [15:0] crc);
    for (int i = 0; i < 8; i++) begin
      logic x16 = data[0] ^ crc[0];
      data = data >> 1;
      if (x16) crc = ((crc ^ 16'h4002) >> 1) | 16'h8000;
      else     crc = (crc >> 1) & 16'h7fff;
    end
    return crc;
  endfunction
  function automatic void gen_crc16();
    int l_byte, l_bit, fwd_zero, fwd_next;
    start_program();
    emit(addi(8, 1, 0));                         // x8 = byte pointer
    emit(addi(9, 1, 12'(CRC_BYTES)));            // x9 = end
    emit(addi(10, 0, 0));                        // x10 = crc
    emit(lui(20, 20'h4)); emit(addi(20, 20, 12'h002));  // x20 = 0x4002
    emit(lui(21, 20'h8));                        // x21 = 0x8000
    l_byte = pc_w;
    emit(lbu(11, 8, 0));
    emit(addi(12, 0, 8));
    l_bit = pc_w;
    emit(xor_(13, 11, 10));
    emit(andi(13, 13, 1));
    emit(srli(11, 11, 1));
    fwd_zero = pc_w; emit(0);                    // beq x13, x0, zero
    emit(xor_(10, 10, 20));
    emit(srli(10, 10, 1));
    emit(or_(10, 10, 21));
    fwd_next = pc_w; emit(0);                    // jal x0, next
    imem[fwd_zero] = beq(13, 0, 13'((pc_w - fwd_zero) * 4));
    emit(srli(10, 10, 1));
    imem[fwd_next] = jal(0, 21'((pc_w - fwd_next) * 4));
    emit(addi(12, 12, -12'sd1));
    emit(bne(12, 0, to(l_bit)));
    emit(addi(8, 8, 1));
    emit(bne(8, 9, to(l_byte)));
    emit(sw(10, 1, 12'h3f0));
    end_program();
  endfunction

  // ---------------- matmul (A at +0x100, B at +0x140, C at +0x180, 4x4 words)
  function automatic void gen_matmul();
    int l_i, l_j, l_k;
    start_program();
    emit(addi(5, 1, 12'h100));                   // x5 = row of A
    emit(addi(19, 1, 12'h180));                  // x19 = next C element
    emit(addi(22, 1, 12'h140));                  // x22 = B
    emit(addi(23, 1, 12'h140));                  // x23 = end of A
    emit(addi(24, 0, 4));                        // x24 = 4
    l_i = pc_w;
    emit(addi(6, 0, 0));                         // x6 = j
    l_j = pc_w;
    emit(addi(14, 5, 0));                        // x14 = &A[i][0]
    emit(sh2add(15, 6, 22));                     // x15 = &B[0][j]
    emit(addi(16, 0, 0));                        // x16 = acc
    emit(addi(7, 0, 4));                         // x7 = k count
    l_k = pc_w;
    emit(lw(17, 14, 0));
    emit(lw(18, 15, 0));
    emit(mul(17, 17, 18));
    emit(add(16, 16, 17));
    emit(addi(14, 14, 4));
    emit(addi(15, 15, 16));
    emit(addi(7, 7, -12'sd1));
    emit(bne(7, 0, to(l_k)));
    emit(sw(16, 19, 0));
    emit(addi(19, 19, 4));
    emit(addi(6, 6, 1));
    emit(bne(6, 24, to(l_j)));
    emit(addi(5, 5, 16));
    emit(bne(5, 23, to(l_i)));
    end_program();
  endfunction

  // ---------------- list (nodes {next, value} at +0x200, head pointer at +0x3e0,
  //                  results sum/count/max at +0x3f4/+0x3f8/+0x3fc)
  localparam int NODES = 16;
  function automatic void gen_list();
    int l_walk;
    start_program();
    emit(lw(8, 1, 12'h3e0));                     // x8 = head
    emit(addi(10, 0, 0));                        // sum
    emit(addi(11, 0, 0));                        // count
    emit(lui(12, 20'h80000));                    // max = most negative
    l_walk = pc_w;
    emit(lw(13, 8, 4));
    emit(add(10, 10, 13));
    emit(max_(12, 12, 13));
    emit(addi(11, 11, 1));
    emit(lw(8, 8, 0));
    emit(bne(8, 0, to(l_walk)));
    emit(sw(10, 1, 12'h3f4));
    emit(sw(11, 1, 12'h3f8));
    emit(sw(12, 1, 12'h3fc));
    end_program();
  endfunction

  task automatic result(input string name, input longint used, input int expected_min_ipc_x100);
    int ipc_x100 = int'((longint'(ncommitted) * 100) / (last_commit - first_commit + 1));
    $display("%s: %0d instructions retired in %0d cycles, IPC %0d.%02d", name, ncommitted,
             last_commit - first_commit + 1, ipc_x100 / 100, ipc_x100 % 100);
    // sanity bound on the rate: below it the core would be stalling for no reason
    checks++;
    if (ipc_x100 < expected_min_ipc_x100) begin
      failures++;
      $display("%s: IPC below %0d.%02d", name, expected_min_ipc_x100 / 100, expected_min_ipc_x100 % 100);
    end
    if (used == 0) failures++;
  endtask

  task automatic expect_word(input logic [11:0] byte_off, input logic [31:0] v, input string what);
    checks++;
    if (dmem[byte_off / 4] !== v) begin
      failures++;
      $display("%s: %h, expected %h", what, dmem[byte_off / 4], v);
    end
  endtask

  task automatic run_kernels(input int min_crc, input int min_mat, input int min_list);
    longint used;
    running = 0;

    // crc16
    begin
      automatic logic [15:0] crc = 16'h0;
      for (int i = 0; i < DMEM_WORDS; i++) dinit[i] = $urandom;
      for (int b = 0; b < CRC_BYTES; b++) crc = crcu8(dinit[b / 4][8 * (b % 4) +: 8], crc);
      gen_crc16();
      run_program(50000, used);
      expect_word(12'h3f0, {16'b0, crc}, "crc16");
      result("crc16", used, min_crc);
    end

    // matmul
    begin
      for (int i = 0; i < DMEM_WORDS; i++) dinit[i] = $urandom;
      gen_matmul();
      run_program(50000, used);
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          automatic logic [31:0] acc = '0;
          for (int k = 0; k < 4; k++)
            acc += dinit[64 + 4 * i + k] * dinit[80 + 4 * k + j];
          expect_word(12'(12'h180 + 16 * i + 4 * j), acc, "matmul");
        end
      result("matmul", used, min_mat);
    end

    // list: random order of the nodes in memory
    begin
      automatic int order [NODES];
      automatic logic [31:0] sum = '0, mx = 32'h8000_0000;
      for (int i = 0; i < DMEM_WORDS; i++) dinit[i] = $urandom;
      for (int i = 0; i < NODES; i++) order[i] = i;
      for (int i = NODES - 1; i > 0; i--) begin
        automatic int j = $urandom_range(0, i);
        automatic int t = order[i]; order[i] = order[j]; order[j] = t;
      end
      // node n lives at slot order[n]; walk order is n = 0, 1, ...
      for (int n = 0; n < NODES; n++) begin
        automatic logic [31:0] val = $urandom;
        dinit[128 + 2 * order[n]]     = (n == NODES - 1) ? 32'h0 : DBASE + 32'h200 + 8 * order[n + 1];
        dinit[128 + 2 * order[n] + 1] = val;
        sum += val;
        if ($signed(val) > $signed(mx)) mx = val;
      end
      dinit[32'h3e0 / 4] = DBASE + 32'h200 + 8 * order[0];
      gen_list();
      run_program(50000, used);
      expect_word(12'h3f4, sum, "list sum");
      expect_word(12'h3f8, NODES, "list count");
      expect_word(12'h3fc, mx, "list max");
      result("list", used, min_list);
    end
  endtask

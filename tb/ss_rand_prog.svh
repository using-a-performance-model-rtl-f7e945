// ss_rand_prog.svh: random program generator for the core tests, included
// after ss_core_env.svh. gen_random_program writes a loop whose body mixes
// ALU, bit-manipulation, LUI/AUIPC, multiplication and carry-less
// multiplication, loads and stores of every size, pairs of compressed
// instructions (with compressed forward branches), and forward branches; the
// loop ends with a compressed indirect call, an indirect jump the frontend
// always mispredicts, and the loop branch. x1 and x8 hold the data base, x2
// the loop counter. gen_alu_block writes independent ALU instructions for
// the throughput check.
  function automatic logic [4:0] rreg();  // any readable register
    return 5'($urandom_range(0, 15));
  endfunction
  function automatic logic [4:0] wreg();  // x3..x15 except x8
    logic [4:0] r = 5'($urandom_range(3, 14));
    return (r == 5'd8) ? 5'd15 : r;
  endfunction
  function automatic logic [2:0] wregp();  // x9..x15 as a compressed register number
    return 3'($urandom_range(1, 7));
  endfunction

  // a pair of compressed instructions filling one word
  function automatic void emit_c(input logic [15:0] c0, input logic [31:0] e0,
                                 input logic [15:0] c1, input logic [31:0] e1);
    cexp[2 * pc_w] = e0; cexp[2 * pc_w + 1] = e1;
    emit({c1, c0});
  endfunction

  // a random compressed instruction that is not control flow, and its expansion
  function automatic void rand_c(output logic [15:0] c, output logic [31:0] e);
    logic [4:0] d = wreg(), s = 5'($urandom_range(1, 15));
    logic [2:0] dp = wregp(), sp = 3'($urandom);
    logic [5:0] i6 = 6'($urandom);
    logic [6:0] u = {$urandom_range(0, 15), 2'b00};
    logic [1:0] f2 = 2'($urandom);
    case ($urandom_range(0, 12))
      0: begin c = c_addi(d, i6); e = addi(d, d, 12'($signed(i6))); end
      1: begin c = c_li(d, i6); e = addi(d, 0, 12'($signed(i6))); end
      2: begin i6 = (i6 == 0) ? 6'd1 : i6; c = c_lui(d, i6); e = lui(d, 20'($signed(i6))); end
      3: begin c = c_jr_mv(d, s); e = add(d, 0, s); end
      4: begin c = c_jalr_add(d, s); e = add(d, d, s); end
      5: begin c = c_shift_andi(2'b00, dp, {1'b0, i6[4:0]});
                e = i_type({7'b0, i6[4:0]}, {2'b01, dp}, 3'b101, {2'b01, dp}, 7'b0010011); end
      6: begin c = c_shift_andi(2'b01, dp, {1'b0, i6[4:0]});
                e = i_type({7'b0100000, i6[4:0]}, {2'b01, dp}, 3'b101, {2'b01, dp}, 7'b0010011); end
      7: begin c = c_shift_andi(2'b10, dp, i6);
                e = i_type(12'($signed(i6)), {2'b01, dp}, 3'b111, {2'b01, dp}, 7'b0010011); end
      8: begin c = c_arith(f2, dp, sp);
                e = r_type((f2 == 0) ? 7'b0100000 : 7'b0, {2'b01, sp}, {2'b01, dp},
                           (f2 == 0) ? 3'b000 : (f2 == 1) ? 3'b100 : (f2 == 2) ? 3'b110 : 3'b111,
                           {2'b01, dp}, 7'b0110011); end
      9: begin c = c_slli(d, i6[4:0]); e = i_type({7'b0, i6[4:0]}, d, 3'b001, d, 7'b0010011); end
      10: begin c = c_lw(dp, 3'd0, u); e = lw({2'b01, dp}, 8, 12'(u)); end
      11: begin c = c_sw(sp, 3'd0, u); e = sw({2'b01, sp}, 8, 12'(u)); end
      default: begin
        logic [9:0] u4 = {$urandom_range(1, 255), 2'b00};
        c = c_addi4spn(dp, u4); e = addi({2'b01, dp}, 2, 12'(u4));
      end
    endcase
  endfunction

  // a random Zba/Zbb/Zbc/Zbs instruction
  function automatic logic [31:0] rand_zb();
    logic [4:0] d = wreg(), s1 = rreg(), s2 = rreg(), sh = 5'($urandom);
    case ($urandom_range(0, 14))
      0: return r_type(7'b0010000, s2, s1, 3'(2 * $urandom_range(1, 3)), d, 7'b0110011);  // shNadd
      1: return r_type(7'b0100000, s2, s1, 3'($urandom_range(0, 2) == 0 ? 3'b111 :
                                              $urandom_range(0, 1) ? 3'b110 : 3'b100), d, 7'b0110011);
      2: return r_type(7'b0000101, s2, s1, 3'($urandom_range(4, 7)), d, 7'b0110011);  // min/max
      3: return r_type(7'b0000101, s2, s1, 3'($urandom_range(1, 3)), d, 7'b0110011);  // clmul*
      4: return r_type(7'b0000100, 0, s1, 3'b100, d, 7'b0110011);                     // zext.h
      5: return r_type(7'b0110000, s2, s1, $urandom_range(0, 1) ? 3'b001 : 3'b101, d, 7'b0110011);
      6: return r_type(7'b0100100, s2, s1, $urandom_range(0, 1) ? 3'b001 : 3'b101, d, 7'b0110011);
      7: return r_type($urandom_range(0, 1) ? 7'b0110100 : 7'b0010100, s2, s1, 3'b001, d, 7'b0110011);
      8: return i_type({7'b0110000, 5'($urandom_range(0, 1) ? $urandom_range(0, 2) :
                                           $urandom_range(4, 5))}, s1, 3'b001, d, 7'b0010011);
      9: return i_type({7'b0110000, sh}, s1, 3'b101, d, 7'b0010011);                // rori
      10: return i_type({7'b0100100, sh}, s1, 3'($urandom_range(0, 1) ? 3'b001 : 3'b101), d,
                        7'b0010011);                                              // bclri/bexti
      11: return i_type({$urandom_range(0, 1) ? 7'b0110100 : 7'b0010100, sh}, s1, 3'b001, d,
                        7'b0010011);                                              // binvi/bseti
      12: return i_type(12'h287, s1, 3'b101, d, 7'b0010011);                      // orc.b
      13: return i_type(12'h698, s1, 3'b101, d, 7'b0010011);                      // rev8
      default: return r_type(7'b0110000, s2, s1, 3'b001, d, 7'b0110011);          // rol
    endcase
  endfunction

  function automatic void gen_random_program(input int body, input int loops);
    int b_start;
    pc_w = 0;
    for (int i = 0; i < IMEM_WORDS; i++) imem[i] = addi(0, 0, 0);
    emit(lui(1, 20'(DBASE >> 12)));            // x1 = data base, never overwritten
    emit(addi(2, 0, 12'(loops)));              // x2 = loop counter
    emit(lui(8, 20'(DBASE >> 12)));            // x8 = data base for compressed accesses
    for (int r = 3; r < 16; r++) if (r != 8) emit(addi(5'(r), 0, 12'($urandom_range(0, 4095))));
    b_start = pc_w;
    for (int i = 0; i < body; i++) begin
      int kind = $urandom_range(0, 99);
      if (kind < 12) emit(rand_zb());
      else if (kind < 22) begin
        logic [15:0] c0, c1; logic [31:0] e0, e1;
        rand_c(c0, e0);
        if (kind < 20 || i >= body - 3) rand_c(c1, e1);
        else begin
          // compressed branch in the second half, to a word 2 or 3 words ahead
          logic [2:0] sp = 3'($urandom);
          logic       ne = 1'($urandom);
          logic [8:0] off = 9'($urandom_range(2, 3) * 4 - 2);
          c1 = c_bz(ne, sp, off);
          e1 = ne ? bne({2'b01, sp}, 0, 13'(off)) : beq({2'b01, sp}, 0, 13'(off));
        end
        emit_c(c0, e0, c1, e1);
      end
      else if (kind < 35) begin
        logic [2:0] f3 = 3'($urandom_range(0, 7));
        logic       alt = (f3 == 3'b000 || f3 == 3'b101) && ($urandom_range(0, 2) == 0);
        emit(r_type(alt ? 7'b0100000 : 7'b0, rreg(), rreg(), f3, wreg(), 7'b0110011));
      end
      else if (kind < 50) emit(addi(wreg(), rreg(), 12'($urandom_range(0, 4095))));
      else if (kind < 53) emit(lui(wreg(), 20'($urandom)));
      else if (kind < 55) emit(auipc(wreg(), 20'($urandom_range(0, 255))));
      else if (kind < 65) emit(r_type(7'b0000001, rreg(), rreg(), 3'($urandom_range(0, 3)),
                                      wreg(), 7'b0110011));
      else if (kind < 77) begin
        // LW, LH/LHU on a halfword boundary or LB/LBU on any byte
        int sel = $urandom_range(0, 4);
        logic [2:0] f3 = (sel == 0) ? 3'b010 : (sel == 1) ? 3'b001 : (sel == 2) ? 3'b101 :
                         (sel == 3) ? 3'b000 : 3'b100;
        int off = $urandom_range(0, 15) * 4 + ((sel == 1 || sel == 2) ? 2 * $urandom_range(0, 1) :
                                               (sel >= 3) ? $urandom_range(0, 3) : 0);
        emit(i_type(12'(off), 1, f3, wreg(), 7'b0000011));
      end
      else if (kind < 89) emit(s_type(12'($urandom_range(0, 15) * 4), rreg(), 1,
                                      3'($urandom_range(0, 1) ? 3'b010 : 3'b000)));
      else if (kind < 97 && i < body - 3) begin
        emit(b_type(13'($urandom_range(2, 3) * 4), rreg(), rreg(),
                    3'(($urandom_range(0, 5) < 2) ? $urandom_range(0, 1) : $urandom_range(4, 7))));
      end else emit(addi(wreg(), wreg(), 12'(1)));
    end
    // compressed indirect call (links pc+2 into x1, then x1 is restored)
    emit(auipc(17, 0));
    emit(addi(17, 17, 12'd12));
    emit_c(c_jalr_add(17, 0), jalr(1, 17, 0), c_addi(0, 0), addi(0, 0, 0));
    emit(lui(1, 20'(DBASE >> 12)));
    // indirect jump over one instruction: always mispredicted by the frontend
    emit(auipc(17, 0));
    emit(jalr(0, 17, 12'd12));
    emit(addi(3, 3, 12'd999));                 // skipped
    emit(addi(2, 2, -12'sd1));
    emit(bne(2, 0, 13'((b_start - pc_w) * 4)));
    end_pc = pc_w * 4;
    emit(jal(0, 21'd0));
  endfunction

  // independent ALU instructions for the throughput check
  function automatic void gen_alu_block(input int n);
    pc_w = 0;
    for (int i = 0; i < IMEM_WORDS; i++) imem[i] = addi(0, 0, 0);
    for (int i = 0; i < n; i++) emit(addi(5'(3 + i % 12), 0, 12'(i + 1)));
    end_pc = pc_w * 4;
    emit(jal(0, 21'd0));
  endfunction


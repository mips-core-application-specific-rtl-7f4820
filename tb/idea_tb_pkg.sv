// idea_tb_pkg: verification helpers for the IDEA crypto processor.
//
// Contents, all independent of the RTL:
//   - instruction encoders for the R-type and I-type formats;
//   - a reference model of every ALSU operation (alsu_ref);
//   - an instruction-set simulator (iss_t) that executes one instruction
//     per call with the architectural rules of the instruction set,
//     including the freeze of the program counter on HLT and on overflow;
//   - a reference IDEA cipher: key expansion, decryption keys, one block;
//   - a program builder (prog_t) and generators of the IDEA programs that
//     run on the processor: key expansion, decryption-key derivation and a
//     block-encryption loop.
//
// Data-memory map used by the generated programs (word addresses):
//   EK_BASE  52 encryption subkeys; the host writes the 128-bit key into
//            its first 8 words (most significant word first)
//   DK_BASE  52 decryption subkeys
//   PT_BASE, CT_BASE, DT_BASE  plaintext, ciphertext, decrypted text,
//            4 words per 64-bit block
package idea_tb_pkg;
  import idea_asip_pkg::*;

  localparam int EK_BASE = 16'h0100;
  localparam int DK_BASE = 16'h0200;
  localparam int PT_BASE = 16'h1000;
  localparam int CT_BASE = 16'h3000;
  localparam int DT_BASE = 16'h5000;

  // ------------------------------------------------------------------
  // instruction encoders
  function automatic instr_t enc_r(funct_t f, int rd, int rs, int rt, int sh = 0);
    return {6'd0, 5'(rs), 5'(rt), 5'(rd), 4'(sh), 7'(f)};
  endfunction
  function automatic instr_t enc_i(opcode_t op, int rs, int rt, int imm);
    return {6'(op), 5'(rs), 5'(rt), 16'(imm)};
  endfunction

  // ------------------------------------------------------------------
  // IDEA arithmetic
  function automatic int unsigned idea_mul(int unsigned a, int unsigned b);
    longint unsigned x = (a == 0) ? 65536 : a;
    longint unsigned y = (b == 0) ? 65536 : b;
    longint unsigned p = (x * y) % 65537;
    return int'(p & 16'hFFFF);
  endfunction
  // inverse by exponentiation: x^(p-2) mod p, p = 65537
  function automatic int unsigned idea_inv(int unsigned a);
    longint unsigned base = (a == 0) ? 65536 : a;
    longint unsigned r = 1;
    for (int e = 0; e < 16; e++) begin  // 65535 = 16 one bits
      r = (r * base) % 65537;
      base = (base * base) % 65537;
    end
    return int'(r & 16'hFFFF);
  endfunction

  // ------------------------------------------------------------------
  // ALSU reference
  function automatic word_t alsu_ref(int op, word_t a, word_t b, int sh,
                                     output logic ovf);
    int sa = int'($signed(a));
    int sb = int'($signed(b));
    int r;
    ovf = 1'b0;
    case (op)
      0: begin r = sa + sb;  ovf = (r > 32767 || r < -32768); end
      1: begin r = sa - 1;   ovf = (r < -32768); end
      2: begin r = sa - sb;  ovf = (r > 32767 || r < -32768); end
      3: begin r = sa + 1;   ovf = (r > 32767); end
      4: r = int'(a) + int'(b);
      5: r = 65536 - int'(b);
      6: begin r = sa * sb;  ovf = (r > 32767 || r < -32768); end
      7: r = int'(idea_mul(a, b));
      8: r = (b == 0) ? -1 : (a == 16'h8000 && b == 16'hFFFF) ? -32768 : sa / sb;
      9: r = (b == 0) ? sa : (a == 16'h8000 && b == 16'hFFFF) ? 0 : sa % sb;
      10: r = int'(b) << sh;
      11: r = int'(b) >> sh;
      12: r = (int'(b) << sh) | (int'(b) >> (16 - sh));
      13: r = (int'(b) >> sh) | (int'(b) << (16 - sh));
      14: begin r = sb * (1 << sh); ovf = (r > 32767 || r < -32768); end
      15: r = sb >>> sh;
      16: r = int'(a);
      17: r = ~int'(a);
      18: r = int'(a & b);
      19: r = int'(~(a & b));
      20: r = int'(a | b);
      21: r = int'(~(a | b));
      22: r = int'(a ^ b);
      23: r = int'(~(a ^ b));
      24: r = (sa < sb) ? 16'hFFFF : 0;
      25: r = sa - sb;
      26: r = int'(idea_inv(a));
      default: r = 0;
    endcase
    return word_t'(r);
  endfunction

  // ALSU operation of an instruction (or -1 when it uses none that matters)
  function automatic int instr_alsu_op(instr_t ins);
    int op = int'(ins[31:26]);
    int fn = int'(ins[6:0]);
    int rmap [25] = '{18,19,20,21,22,23,17,10,11,14,15,12,13,0,2,6,8,9,3,1,24,4,7,5,26};
    if (op == 0) return (fn <= 24) ? rmap[fn] : 16;
    case (op)
      1: return 18;  2: return 19;  3: return 20;  4: return 21;
      5: return 22;  6: return 23;  7: return 17;
      8, 9: return 25;
      13, 15: return 4;
      17: return 0;  18: return 2;  19: return 6;  20: return 8;
      21: return 9;  22: return 24;
      default: return 16;
    endcase
  endfunction

  // ------------------------------------------------------------------
  // instruction-set simulator
  class iss_t;
    word_t regs [32];
    word_t dm [int];
    word_t pc;
    bit    frozen;       // HLT or overflow: PC no longer advances
    bit    last_ovf;
    bit    last_taken;

    function new();
      pc = 0; frozen = 0;
      foreach (regs[i]) regs[i] = 0;
    endfunction

    function word_t rd_mem(word_t a);
      return dm.exists(int'(a)) ? dm[int'(a)] : 16'h0;
    endfunction

    // execute one instruction; returns 1 when the PC stays where it is
    function bit step(instr_t ins);
      int op = int'(ins[31:26]);
      int fn = int'(ins[6:0]);
      int rs = int'(ins[25:21]), rt = int'(ins[20:16]), rdd = int'(ins[15:11]);
      int sh = int'(ins[10:7]);
      word_t imm = ins[15:0];
      word_t a, b, res, npc;
      logic ovf;
      int aop = instr_alsu_op(ins);
      bit halt = (op == 0 && fn == 25);
      bit src_a_imm = (op == 7 || op == 14);
      bit src_b_imm = (op >= 1 && op <= 6) || op == 13 || op == 15 || (op >= 17 && op <= 22);
      a = src_a_imm ? imm : regs[rs];
      b = src_b_imm ? imm : regs[rt];
      res = alsu_ref(aop, a, b, sh, ovf);
      if (!(aop <= 3 || aop == 6 || aop == 14)) ovf = 0;
      last_ovf = ovf;
      last_taken = 0;
      npc = pc + 1;
      if (op == 8 && regs[rs] == regs[rt]) begin npc = pc + 1 + imm; last_taken = 1; end
      if (op == 9 && regs[rs] != regs[rt]) begin npc = pc + 1 + imm; last_taken = 1; end
      if (op == 10 || op == 12) npc = imm;
      if (op == 11) npc = regs[rs];
      // memory write
      if (op == 15) dm[int'(res)] = regs[rt];
      if (op == 16) dm[int'(res)] = imm;
      // register write
      if (op == 0 && fn <= 24) regs[rdd] = res;
      else if ((op >= 1 && op <= 7) || op == 14 || (op >= 17 && op <= 22)) regs[rt] = res;
      else if (op == 13) regs[rt] = rd_mem(res);
      else if (op == 12) regs[rt] = pc + 1;
      frozen = halt || ovf;
      if (!frozen) pc = npc;
      return frozen;
    endfunction
  endclass

  // ------------------------------------------------------------------
  // reference IDEA
  typedef int unsigned subkeys_t [52];
  typedef int unsigned block_t [4];

  function automatic subkeys_t idea_expand(block_t key_lo, block_t key_hi);
    subkeys_t z;
    for (int i = 0; i < 4; i++) begin z[i] = key_lo[i]; z[i+4] = key_hi[i]; end
    // rotating the 128-bit key left by 25 bits, in 16-bit words
    for (int i = 8; i < 52; i++) begin
      int g = (i / 8 - 1) * 8;
      z[i] = ((z[g + ((i + 1) % 8)] << 9) | (z[g + ((i + 2) % 8)] >> 7)) & 16'hFFFF;
    end
    return z;
  endfunction

  function automatic subkeys_t idea_decrypt_keys(subkeys_t ek);
    subkeys_t dk;
    for (int i = 1; i <= 9; i++) begin
      int s = 6 * (10 - i - 1);   // first key of encryption round 10-i
      int d = 6 * (i - 1);
      bit outer = (i == 1 || i == 9);
      dk[d + 0] = idea_inv(ek[s + 0]);
      dk[d + 1] = (65536 - ek[s + (outer ? 1 : 2)]) & 16'hFFFF;
      dk[d + 2] = (65536 - ek[s + (outer ? 2 : 1)]) & 16'hFFFF;
      dk[d + 3] = idea_inv(ek[s + 3]);
      if (i <= 8) begin
        dk[d + 4] = ek[6 * (9 - i - 1) + 4];
        dk[d + 5] = ek[6 * (9 - i - 1) + 5];
      end
    end
    return dk;
  endfunction

  function automatic block_t idea_block(block_t x, subkeys_t k);
    int unsigned a = x[0], b = x[1], c = x[2], d = x[3];
    int unsigned p, q, nb, nc;
    block_t y;
    for (int r = 0; r < 8; r++) begin
      a = idea_mul(a, k[6*r]);
      b = (b + k[6*r+1]) & 16'hFFFF;
      c = (c + k[6*r+2]) & 16'hFFFF;
      d = idea_mul(d, k[6*r+3]);
      p = idea_mul(a ^ c, k[6*r+4]);
      q = idea_mul((p + (b ^ d)) & 16'hFFFF, k[6*r+5]);
      p = (p + q) & 16'hFFFF;
      a = a ^ q;  d = d ^ p;
      nb = c ^ q; nc = b ^ p;
      b = nb;     c = nc;
    end
    y[0] = idea_mul(a, k[48]);
    y[1] = (c + k[49]) & 16'hFFFF;   // undo the swap of the last round
    y[2] = (b + k[50]) & 16'hFFFF;
    y[3] = idea_mul(d, k[51]);
    return y;
  endfunction

  // ------------------------------------------------------------------
  // program builder and IDEA program generators
  class prog_t;
    instr_t code [$];
    int     planned_cycles;   // instructions executed before the final HLT

    function void emit(instr_t i);
      code.push_back(i);
    endfunction
    function int here();
      return code.size();
    endfunction

    // registers used by the generated code
    localparam int RZ = 0;                   // holds 0
    localparam int RFOUR = 30;               // holds 4
    localparam int RP = 26, RO = 27, REND = 29;
    localparam int X1 = 17, X2 = 18, X3 = 19, X4 = 20;
    localparam int K = 21, T0 = 22, T1 = 23;

    function void setup();
      emit(enc_i(OP_LWI, 0, RZ, 0));
      emit(enc_i(OP_LWI, 0, RFOUR, 4));
    endfunction

    // EK[8..51] from the key in EK[0..7]: each subkey is the previous
    // group's word (i+1) mod 8 shifted left by 9 ORed with word (i+2) mod 8
    // shifted right by 7. Groups alternate between r1..r8 and r9..r16.
    function void key_expansion();
      for (int j = 0; j < 8; j++) emit(enc_i(OP_LW, RZ, 1 + j, EK_BASE + j));
      for (int i = 8; i < 52; i++) begin
        int src = ((i / 8 - 1) % 2) * 8 + 1;
        int dst = ((i / 8) % 2) * 8 + 1;
        emit(enc_r(F_SHL, T0, 0, src + ((i + 1) % 8), 9));
        emit(enc_r(F_SHR, T1, 0, src + ((i + 2) % 8), 7));
        emit(enc_r(F_OR,  dst + (i % 8), T0, T1));
        emit(enc_i(OP_SW, RZ, dst + (i % 8), EK_BASE + i));
      end
    endfunction

    // DK from EK following the decryption-subkey table
    function void decrypt_keys();
      for (int i = 1; i <= 9; i++) begin
        int s = EK_BASE + 6 * (10 - i - 1);
        int d = DK_BASE + 6 * (i - 1);
        bit outer = (i == 1 || i == 9);
        emit(enc_i(OP_LW, RZ, K, s + 0)); emit(enc_r(F_MUI, K, K, 0)); emit(enc_i(OP_SW, RZ, K, d + 0));
        emit(enc_i(OP_LW, RZ, K, s + (outer ? 1 : 2))); emit(enc_r(F_ADI, K, 0, K)); emit(enc_i(OP_SW, RZ, K, d + 1));
        emit(enc_i(OP_LW, RZ, K, s + (outer ? 2 : 1))); emit(enc_r(F_ADI, K, 0, K)); emit(enc_i(OP_SW, RZ, K, d + 2));
        emit(enc_i(OP_LW, RZ, K, s + 3)); emit(enc_r(F_MUI, K, K, 0)); emit(enc_i(OP_SW, RZ, K, d + 3));
        if (i <= 8) begin
          emit(enc_i(OP_LW, RZ, K, EK_BASE + 6 * (9 - i - 1) + 4)); emit(enc_i(OP_SW, RZ, K, d + 4));
          emit(enc_i(OP_LW, RZ, K, EK_BASE + 6 * (9 - i - 1) + 5)); emit(enc_i(OP_SW, RZ, K, d + 5));
        end
      end
    endfunction

    // Process nblocks 64-bit blocks from src to dst with the subkeys at
    // kbase (EK encrypts, DK decrypts). Loop body: 4 loads, 8 rounds of
    // 20 instructions, 8 for the output transformation, 4 stores, 2 pointer
    // updates and the loop branch.
    function void crypt_loop(int kbase, int src, int dst, int nblocks);
      int top, x2, x3, tmp;
      emit(enc_i(OP_LWI, 0, RP, src));
      emit(enc_i(OP_LWI, 0, RO, dst));
      emit(enc_i(OP_LWI, 0, REND, src + 4 * nblocks));
      top = here();
      x2 = X2; x3 = X3;
      emit(enc_i(OP_LW, RP, X1, 0)); emit(enc_i(OP_LW, RP, x2, 1));
      emit(enc_i(OP_LW, RP, x3, 2)); emit(enc_i(OP_LW, RP, X4, 3));
      for (int r = 0; r < 8; r++) begin
        int kb = kbase + 6 * r;
        emit(enc_i(OP_LW, RZ, K, kb + 0)); emit(enc_r(F_MULM, X1, X1, K));
        emit(enc_i(OP_LW, RZ, K, kb + 1)); emit(enc_r(F_ADDM, x2, x2, K));
        emit(enc_i(OP_LW, RZ, K, kb + 2)); emit(enc_r(F_ADDM, x3, x3, K));
        emit(enc_i(OP_LW, RZ, K, kb + 3)); emit(enc_r(F_MULM, X4, X4, K));
        emit(enc_r(F_XOR, T0, X1, x3));
        emit(enc_i(OP_LW, RZ, K, kb + 4)); emit(enc_r(F_MULM, T0, T0, K));
        emit(enc_r(F_XOR, T1, x2, X4)); emit(enc_r(F_ADDM, T1, T1, T0));
        emit(enc_i(OP_LW, RZ, K, kb + 5)); emit(enc_r(F_MULM, T1, T1, K));
        emit(enc_r(F_ADDM, T0, T0, T1));
        emit(enc_r(F_XOR, X1, X1, T1)); emit(enc_r(F_XOR, X4, X4, T0));
        emit(enc_r(F_XOR, x2, x2, T0)); emit(enc_r(F_XOR, x3, x3, T1));
        tmp = x2; x2 = x3; x3 = tmp;       // middle words swap by renaming
      end
      emit(enc_i(OP_LW, RZ, K, kbase + 48)); emit(enc_r(F_MULM, X1, X1, K));
      emit(enc_i(OP_LW, RZ, K, kbase + 49)); emit(enc_r(F_ADDM, x3, x3, K));
      emit(enc_i(OP_LW, RZ, K, kbase + 50)); emit(enc_r(F_ADDM, x2, x2, K));
      emit(enc_i(OP_LW, RZ, K, kbase + 51)); emit(enc_r(F_MULM, X4, X4, K));
      emit(enc_i(OP_SW, RO, X1, 0)); emit(enc_i(OP_SW, RO, x3, 1));
      emit(enc_i(OP_SW, RO, x2, 2)); emit(enc_i(OP_SW, RO, X4, 3));
      emit(enc_r(F_ADDM, RP, RP, RFOUR));
      emit(enc_r(F_ADDM, RO, RO, RFOUR));
      emit(enc_i(OP_BNE, RP, REND, top - (here() + 1)));
    endfunction

    function void halt();
      emit(enc_r(F_HLT, 0, 0, 0));
    endfunction
  endclass

  // instructions in one pass of the crypt_loop body
  localparam int LOOP_BODY = 4 + 8 * 20 + 8 + 4 + 3;

endpackage

// tb_idea_asip: end-to-end test of the processor at its default sizes.
//
// 1. IDEA known-answer test: the processor expands the 128-bit key
//    0001 0002 ... 0008 into 52 subkeys, derives the 52 decryption subkeys
//    (inverses from the lookup table, additive inverses), encrypts the
//    block 0000 0001 0002 0003 and decrypts the result. The ciphertext must
//    be 11FB ED2B 0198 6DE5, the subkeys must match a reference model, the
//    decrypted block must equal the plaintext, and the run must take exactly
//    one clock cycle per executed instruction.
// 2. Lockstep test: random programs (every instruction of the set, forward
//    branches and jumps, loads and stores, overflowing arithmetic) run on
//    the processor and on an instruction-set simulator; PC and all 32
//    registers are compared before every clock edge and the touched data
//    memory after every program. A program ends at its HLT or at the first
//    overflow, which must freeze the PC.
// 3. Coverage: every instruction, taken and untaken branches, the halt, and
//    the overflow freeze from addition, multiplication and arithmetic
//    shift-left must each have happened; a mechanism that never happened
//    counts as a failure.
module tb_idea_asip;
  import idea_asip_pkg::*;
  import idea_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic   rst = 1;
  logic   im_we = 0, lut_we = 0, dm_host_en = 0, dm_host_we = 0;
  word_t  im_waddr = 0, lut_waddr = 0, lut_wdata = 0, dm_host_addr = 0, dm_host_wdata = 0;
  instr_t im_wdata = 0;
  word_t  dm_host_rdata, pc;
  instr_t instr;
  logic   halted, overflow, carry_flag, sign_flag, branch_taken;

  idea_asip dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---- host helpers --------------------------------------------------
  task automatic host_write(int addr, int data);
    @(negedge clk);
    dm_host_en = 1; dm_host_we = 1; dm_host_addr = word_t'(addr); dm_host_wdata = word_t'(data);
    @(negedge clk);
    dm_host_we = 0; dm_host_en = 0;
  endtask
  task automatic host_read(int addr, output word_t data);
    dm_host_en = 1; dm_host_addr = word_t'(addr);
    #1 data = dm_host_rdata;
    dm_host_en = 0;
  endtask
  task automatic load_program(instr_t code [$], int clear_to = 0);
    for (int i = 0; i < code.size() || i < clear_to; i++) begin
      @(negedge clk);
      im_we = 1; im_waddr = word_t'(i);
      im_wdata = (i < code.size()) ? code[i] : enc_r(F_HLT, 0, 0, 0);
    end
    @(negedge clk) im_we = 0;
  endtask
  task automatic load_lut();
    for (int i = 0; i < 65536; i++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = word_t'(i); lut_wdata = word_t'(idea_inv(i));
    end
    @(negedge clk) lut_we = 0;
  endtask
  // release reset and count cycles until the core halts
  task automatic run(int max_cycles, output int cycles);
    @(negedge clk) rst = 0;
    cycles = 0;
    while (!halted && cycles < max_cycles) begin
      @(posedge clk); #1;
      cycles++;
    end
    @(negedge clk) rst = 1;
  endtask

  // ---- coverage counters ---------------------------------------------
  int ins_seen [string];
  int n_taken = 0, n_not_taken = 0, n_halt = 0;
  int n_ovf_add = 0, n_ovf_mul = 0, n_ovf_ashl = 0;

  function automatic string ins_name(instr_t i);
    int op = int'(i[31:26]);
    return (op == 0) ? $sformatf("f%0d", int'(i[6:0])) : $sformatf("o%0d", op);
  endfunction

  // ---- random program generator --------------------------------------
  function automatic void random_program(ref instr_t code [$]);
    int len = 40 + int'($urandom % 120);
    code.delete();
    for (int r = 0; r < 32; r++) begin
      int v = ($urandom % 4 != 0) ? int'($urandom % 200) - 100 : int'($urandom);
      code.push_back(enc_i(OP_LWI, 0, r, v));
    end
    for (int k = 0; k < len; k++) begin
      int c = int'($urandom % 100);
      int rs = int'($urandom % 32), rt = int'($urandom % 32), rd = int'($urandom % 32);
      int imm = ($urandom % 2) ? int'($urandom % 64) - 32 : int'($urandom);
      if (c < 55) begin
        int fn = int'($urandom % 25);
        code.push_back(enc_r(funct_t'(fn), rd, rs, rt, int'($urandom % 16)));
      end else if (c < 80) begin
        int ops [14] = '{1,2,3,4,5,6,7,14,17,18,19,20,21,22};
        code.push_back(enc_i(opcode_t'(ops[$urandom % 14]), rs, rt, imm));
      end else if (c < 87) begin
        int ops [3] = '{13, 15, 16};
        code.push_back(enc_i(opcode_t'(ops[$urandom % 3]), rs, rt, imm));
      end else if (c < 95) begin   // forward branch
        code.push_back(enc_i(($urandom % 2) ? OP_BEQ : OP_BNE, rs, ($urandom % 3 == 0) ? rs : rt,
                             1 + int'($urandom % 4)));
      end else if (c < 97) begin   // forward jump / jump-and-link
        code.push_back(enc_i(($urandom % 2) ? OP_J : OP_JAL, 0, rt, code.size() + 2 + int'($urandom % 3)));
      end else begin               // jump register to a forward target
        code.push_back(enc_i(OP_LWI, 0, rt, code.size() + 3 + int'($urandom % 3)));
        code.push_back(enc_i(OP_JR, rt, 0, 0));
      end
    end
    code.push_back(enc_r(F_HLT, 0, 0, 0));
  endfunction

  // ---- lockstep run against the ISS ----------------------------------
  task automatic lockstep(instr_t code [$]);
    iss_t iss = new();
    bit done = 0;
    int cyc = 0;
    // registers not yet written by the program hold what the last one left
    for (int r = 0; r < 32; r++) iss.regs[r] = dut.u_rf.regs[r];
    @(negedge clk) rst = 0;
    while (!done && cyc < 2000) begin
      instr_t cur;
      #1;
      cur = (int'(iss.pc) < code.size()) ? code[iss.pc] : enc_r(F_HLT, 0, 0, 0);
      check(pc === iss.pc, $sformatf("pc %h vs iss %h", pc, iss.pc));
      for (int r = 0; r < 32; r++)
        if (dut.u_rf.regs[r] !== iss.regs[r]) begin
          check(0, $sformatf("reg %0d %h vs iss %h at pc %h", r, dut.u_rf.regs[r], iss.regs[r], pc));
          break;
        end
      ins_seen[ins_name(cur)]++;
      done = iss.step(cur);
      if (iss.last_taken) n_taken++;
      else if (cur[31:26] == 6'(OP_BEQ) || cur[31:26] == 6'(OP_BNE)) n_not_taken++;
      check(halted === done, $sformatf("halted=%b iss frozen=%b at pc %h", halted, done, pc));
      if (done) begin
        int aop = instr_alsu_op(cur);
        if (iss.last_ovf) begin
          if (aop <= 3) n_ovf_add++;
          else if (aop == 6) n_ovf_mul++;
          else if (aop == 14) n_ovf_ashl++;
        end else n_halt++;
      end
      begin
        word_t pc_before = pc;
        @(posedge clk);
        cyc++;
        // the edge of a HLT or an overflowing instruction must not move the PC
        if (done) begin
          #1;
          check(pc === pc_before, "PC frozen on the edge of HLT/overflow");
        end
      end
    end
    @(negedge clk) rst = 1;
    foreach (iss.dm[a]) begin
      word_t d;
      @(negedge clk);
      host_read(a, d);
      check(d === iss.dm[a], $sformatf("dm[%h]=%h vs iss %h", a, d, iss.dm[a]));
    end
    // clean the touched words for the next program
    foreach (iss.dm[a]) host_write(a, 0);
  endtask

  // ---- main ----------------------------------------------------------
  initial begin
    int cycles;
    instr_t rnd [$];
    automatic prog_t p = new();
    automatic block_t key_lo = '{1, 2, 3, 4}; automatic block_t key_hi = '{5, 6, 7, 8};
    automatic block_t pt = '{0, 1, 2, 3};
    automatic block_t ct_paper = '{16'h11FB, 16'hED2B, 16'h0198, 16'h6DE5};
    automatic subkeys_t ek = idea_expand(key_lo, key_hi);
    automatic subkeys_t dk = idea_decrypt_keys(ek);
    int n_setup, n_keys, n_dkeys;

    load_lut();
    // zero the data memory, fill the instruction memory with HLT
    for (int a = 0; a < 65536; a++) begin
      @(negedge clk);
      dm_host_en = 1; dm_host_we = 1; dm_host_addr = word_t'(a); dm_host_wdata = 0;
    end
    @(negedge clk) begin dm_host_en = 0; dm_host_we = 0; end

    // ---- 1. IDEA known-answer test ----
    p.setup();            n_setup = p.here();
    p.key_expansion();    n_keys  = p.here() - n_setup;
    p.decrypt_keys();     n_dkeys = p.here() - n_setup - n_keys;
    p.crypt_loop(EK_BASE, PT_BASE, CT_BASE, 1);
    p.crypt_loop(DK_BASE, CT_BASE, DT_BASE, 1);
    p.halt();
    load_program(p.code, 65536);
    for (int i = 0; i < 4; i++) begin
      host_write(EK_BASE + i, key_lo[i]);
      host_write(EK_BASE + 4 + i, key_hi[i]);
      host_write(PT_BASE + i, pt[i]);
    end
    run(100000, cycles);
    // every instruction once, in order: cycles = program length - 1 (HLT)
    check(cycles == p.code.size() - 1,
          $sformatf("cycles %0d, expected %0d (CPI = 1)", cycles, p.code.size() - 1));
    for (int i = 0; i < 52; i++) begin
      word_t d;
      host_read(EK_BASE + i, d); check(d === word_t'(ek[i]), $sformatf("EK[%0d]=%h exp %h", i, d, ek[i]));
      host_read(DK_BASE + i, d); check(d === word_t'(dk[i]), $sformatf("DK[%0d]=%h exp %h", i, d, dk[i]));
    end
    for (int i = 0; i < 4; i++) begin
      word_t d;
      host_read(CT_BASE + i, d); check(d === word_t'(ct_paper[i]), $sformatf("CT[%0d]=%h exp %h", i, d, ct_paper[i]));
      host_read(DT_BASE + i, d); check(d === word_t'(pt[i]), $sformatf("DT[%0d]=%h exp %h", i, d, pt[i]));
    end
    $display("IDEA known-answer run: %0d cycles (setup %0d, key expansion %0d, decryption keys %0d, %0d per block)",
             cycles, n_setup, n_keys, n_dkeys, LOOP_BODY + 3);
    $display("first block incl. subkey generation: %0d cycles; each further block: %0d cycles",
             n_setup + n_keys + 3 + LOOP_BODY, LOOP_BODY);
    // clean data memory used by part 1
    for (int i = 0; i < 52; i++) begin host_write(EK_BASE + i, 0); host_write(DK_BASE + i, 0); end
    for (int i = 0; i < 4; i++) begin host_write(PT_BASE + i, 0); host_write(CT_BASE + i, 0); host_write(DT_BASE + i, 0); end

    // ---- 2. lockstep random programs ----
    for (int n = 0; n < 400; n++) begin
      random_program(rnd);
      load_program(rnd, 0);
      // the word after the program, plus a margin, must be HLT
      for (int i = rnd.size(); i < rnd.size() + 8; i++) begin
        @(negedge clk); im_we = 1; im_waddr = word_t'(i); im_wdata = enc_r(F_HLT, 0, 0, 0);
      end
      @(negedge clk) im_we = 0;
      lockstep(rnd);
      // restore HLT over the program for the next one
      for (int i = 0; i < rnd.size(); i++) begin
        @(negedge clk); im_we = 1; im_waddr = word_t'(i); im_wdata = enc_r(F_HLT, 0, 0, 0);
      end
      @(negedge clk) im_we = 0;
    end

    // ---- 3. coverage ----
    for (int fn = 0; fn <= 25; fn++)
      check(ins_seen.exists($sformatf("f%0d", fn)), $sformatf("function %0d never executed", fn));
    for (int op = 1; op <= 22; op++)
      check(ins_seen.exists($sformatf("o%0d", op)), $sformatf("opcode %0d never executed", op));
    check(n_taken > 0, "no taken branch");
    check(n_not_taken > 0, "no untaken branch");
    check(n_halt > 0, "no HLT");
    check(n_ovf_add > 0, "no add/sub overflow freeze");
    check(n_ovf_mul > 0, "no multiply overflow freeze");
    check(n_ovf_ashl > 0, "no ASHL overflow freeze");
    $display("mechanisms: taken=%0d untaken=%0d halt=%0d ovf_add=%0d ovf_mul=%0d ovf_ashl=%0d",
             n_taken, n_not_taken, n_halt, n_ovf_add, n_ovf_mul, n_ovf_ashl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

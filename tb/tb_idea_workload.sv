// tb_idea_workload: bulk IDEA encryption at every plaintext size of the
// published runtime comparison: 64, 128, 256, 512 bits and 1K .. 32K bits
// (1 to 512 blocks of 64 bits), with the processor at its default sizes.
//
// For each size the host writes the key 0001 0002 ... 0008 and random
// plaintext into data memory; the processor program expands the key,
// derives the decryption subkeys, encrypts all blocks in a loop and then
// decrypts the ciphertext. The testbench checks every ciphertext word
// against a reference IDEA model, every decrypted word against the
// plaintext, and that the run takes exactly one cycle per executed
// instruction (setup + key expansion + decryption keys + 2 x (3 + blocks x
// loop body)). It prints cycles and the runtime at the published clock
// frequency of 19.264 MHz, for the encryption part alone and in total.
module tb_idea_workload;
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
    repeat (5000000) @(posedge clk);
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

  initial begin
    automatic block_t key_lo = '{1, 2, 3, 4}; automatic block_t key_hi = '{5, 6, 7, 8};
    automatic subkeys_t ek = idea_expand(key_lo, key_hi);
    automatic int sizes_bits [10] = '{64, 128, 256, 512, 1024, 2048, 4096, 8192, 16384, 32768};

    for (int i = 0; i < 65536; i++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = word_t'(i); lut_wdata = word_t'(idea_inv(i));
    end
    @(negedge clk) lut_we = 0;

    foreach (sizes_bits[s]) begin
      int nblk, cycles, expect_cycles, enc_end, enc_cycles;
      int unsigned pt [$];
      prog_t p;
      nblk = sizes_bits[s] / 64;
      cycles = 0;
      enc_cycles = 0;
      pt.delete();
      p = new();
      p.setup();
      p.key_expansion();
      p.decrypt_keys();
      p.crypt_loop(EK_BASE, PT_BASE, CT_BASE, nblk);
      enc_end = p.here();
      p.crypt_loop(DK_BASE, CT_BASE, DT_BASE, nblk);
      p.halt();
      for (int i = 0; i < p.code.size(); i++) begin
        @(negedge clk);
        im_we = 1; im_waddr = word_t'(i); im_wdata = p.code[i];
      end
      @(negedge clk) im_we = 0;
      for (int i = 0; i < 4; i++) begin
        host_write(EK_BASE + i, key_lo[i]);
        host_write(EK_BASE + 4 + i, key_hi[i]);
      end
      for (int i = 0; i < 4 * nblk; i++) begin
        pt.push_back($urandom & 16'hFFFF);
        host_write(PT_BASE + i, pt[i]);
      end
      @(negedge clk) rst = 0;
      while (!halted && cycles < 1000000) begin
        @(posedge clk); #1;
        cycles++;
        if (pc == word_t'(enc_end) && enc_cycles == 0) enc_cycles = cycles;
      end
      @(negedge clk) rst = 1;
      expect_cycles = p.code.size() - 1 + 2 * (nblk - 1) * LOOP_BODY;
      check(cycles == expect_cycles, $sformatf("%0d bits: %0d cycles, expected %0d", sizes_bits[s], cycles, expect_cycles));
      for (int b = 0; b < nblk; b++) begin
        block_t x, y;
        for (int i = 0; i < 4; i++) x[i] = pt[4 * b + i];
        y = idea_block(x, ek);
        for (int i = 0; i < 4; i++) begin
          word_t c, d;
          host_read(CT_BASE + 4 * b + i, c);
          host_read(DT_BASE + 4 * b + i, d);
          check(c === word_t'(y[i]), $sformatf("%0d bits: block %0d word %0d ct %h exp %h", sizes_bits[s], b, i, c, y[i]));
          check(d === word_t'(x[i]), $sformatf("%0d bits: block %0d word %0d dt %h exp %h", sizes_bits[s], b, i, d, x[i]));
        end
      end
      check(enc_cycles == enc_end + (nblk - 1) * LOOP_BODY, "encryption phase: one cycle per instruction");
      $display("%6d bits: encryption incl. key setup %7d cycles = %7.1f us at 19.264 MHz; with decryption %7d cycles",
               sizes_bits[s], enc_cycles, real'(enc_cycles) / 19.264, cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

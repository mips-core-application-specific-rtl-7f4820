// tb_alsu: fills the inverse table, then drives every ALSU operation code
// (0..31) with edge and random operands and all shift amounts, comparing
// result, overflow, sign and zero flags with an integer reference model.
// A few hand-worked values (IDEA multiplication and inverses, additive
// inverse, set-on-less-than, add carry) are checked as literals.
module tb_alsu;
  import idea_asip_pkg::*;
  import idea_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  word_t a, b, result;
  logic [3:0] shamt;
  alsu_op_t op;
  logic overflow, carry, sign, zero;
  logic lut_we = 0;
  word_t lut_waddr = 0, lut_wdata = 0;

  alsu dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int o, word_t aa, word_t bb, int s);
    logic eovf;
    word_t exp;
    op = alsu_op_t'(o); a = aa; b = bb; shamt = 4'(s);
    #1;
    exp = alsu_ref(o, aa, bb, s, eovf);
    if (!(o <= 3 || o == 6 || o == 14)) eovf = 0;
    checks++;
    if (result !== exp || overflow !== eovf || sign !== exp[15] || zero !== (exp == 0)) begin
      failures++;
      if (failures < 15)
        $display("FAIL op=%0d a=%h b=%h s=%0d: r=%h exp=%h ovf=%b/%b", o, aa, bb, s, result, exp, overflow, eovf);
    end
  endtask

  task automatic lit(int o, word_t aa, word_t bb, word_t exp);
    op = alsu_op_t'(o); a = aa; b = bb; shamt = 0;
    #1;
    checks++;
    if (result !== exp) begin
      failures++;
      $display("FAIL literal op=%0d a=%h b=%h: r=%h exp=%h", o, aa, bb, result, exp);
    end
  endtask

  initial begin
    automatic word_t edge_v [8] = '{16'h0000, 16'h0001, 16'hFFFF, 16'h7FFF, 16'h8000, 16'h8001, 16'h00FF, 16'h1234};
    // fill the inverse table
    for (int i = 0; i < 65536; i++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = 16'(i); lut_wdata = 16'(idea_inv(i));
    end
    @(negedge clk) lut_we = 0;
    for (int o = 0; o < 32; o++) begin
      foreach (edge_v[i]) foreach (edge_v[j]) check(o, edge_v[i], edge_v[j], (i * 8 + j) % 16);
      for (int n = 0; n < 400; n++) check(o, word_t'($urandom), word_t'($urandom), n % 16);
    end
    // literals worked out by hand
    lit(7, 16'h0000, 16'h0000, 16'h0001);  // 2^16 * 2^16 = (-1)(-1) = 1
    lit(7, 16'h0002, 16'h8000, 16'h0000);  // 2 * 2^15 = 2^16 -> 0x0000
    lit(7, 16'h0003, 16'h5556, 16'h0001);  // 3 * 21846 = 65538 = 1 mod 65537
    lit(26, 16'h0003, 16'h0000, 16'h5556);
    lit(26, 16'h0000, 16'h0000, 16'h0000);
    lit(26, 16'h0002, 16'h0000, 16'h8001);  // 2 * 32769 = 65538
    lit(5, 16'h0000, 16'h0001, 16'hFFFF);
    lit(5, 16'h0000, 16'h0000, 16'h0000);
    lit(24, 16'hFFFF, 16'h0001, 16'hFFFF);  // -1 < 1
    lit(24, 16'h7FFF, 16'h8000, 16'h0000);  // 32767 > -32768
    lit(4, 16'hFFFF, 16'h0002, 16'h0001);
    // carry of the adder
    op = ALSU_ADD; a = 16'hFFFF; b = 16'h0001; #1;
    checks++; if (carry !== 1'b1 || overflow !== 1'b0) begin failures++; $display("FAIL add carry"); end
    op = ALSU_ADDM; a = 16'h7FFF; b = 16'h0001; #1;
    checks++; if (overflow !== 1'b0 || carry !== 1'b0) begin failures++; $display("FAIL addm flags"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

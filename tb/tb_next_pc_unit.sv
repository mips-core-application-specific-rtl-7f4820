// tb_next_pc_unit: random PC, offset, RS and control values; the expected
// next PC follows the instruction definitions: PC+1, PC+1+Offset for a
// taken BEQ/BNE, Offset for J/JAL, RS for JR.
module tb_next_pc_unit;
  import idea_asip_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  word_t pc, offset, rs_data, pc_plus1, next_pc;
  logic zero_flag, branch, branch_not_equal, jump, jump_reg, branch_taken;

  next_pc_unit dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      word_t exp;
      bit taken;
      automatic int kind = int'($urandom % 5);   // 0 seq, 1 beq, 2 bne, 3 j, 4 jr
      pc = word_t'($urandom); offset = word_t'($urandom); rs_data = word_t'($urandom);
      if (n < 4) pc = 16'hFFFF;         // wrap-around
      zero_flag = 1'($urandom);
      branch = (kind == 1 || kind == 2);
      branch_not_equal = (kind == 2);
      jump = (kind == 3);
      jump_reg = (kind == 4);
      #1;
      taken = (kind == 1 && zero_flag) || (kind == 2 && !zero_flag);
      case (kind)
        3: exp = offset;
        4: exp = rs_data;
        default: exp = taken ? word_t'(int'(pc) + 1 + int'(offset)) : word_t'(int'(pc) + 1);
      endcase
      checks++;
      if (next_pc !== exp || pc_plus1 !== word_t'(int'(pc) + 1) || branch_taken !== taken) begin
        failures++;
        if (failures < 10) $display("FAIL kind=%0d pc=%h off=%h z=%b: %h exp %h", kind, pc, offset, zero_flag, next_pc, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

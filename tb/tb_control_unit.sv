// tb_control_unit: decodes every Opcode (0..63) with every Function
// (0..127) and compares all control signals with a table written from the
// instruction-set definitions (what each instruction reads, writes and
// where its next PC comes from), including the published ToRegister rule.
module tb_control_unit;
  import idea_asip_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [5:0] opcode;
  logic [6:0] funct;
  ctrl_t ctrl;

  control_unit dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ctrl_t expected(int op, int fn);
    ctrl_t c = '0;
    // ALSU operation per function code 0..24 (table order of the ISA)
    int rmap [25] = '{18,19,20,21,22,23,17,10,11,14,15,12,13,0,2,6,8,9,3,1,24,4,7,5,26};
    // ALSU operation of I-type opcodes 1..22 (-1: transfer)
    int imap [23] = '{-1,18,19,20,21,22,23,17,25,25,-1,-1,-1,4,-1,4,-1,0,2,6,8,9,24};
    c.alsu_op = ALSU_PASS;
    if (op == 0) begin
      if (fn <= 24) begin
        c.reg_dst = 1; c.write_enable = 1; c.to_register = 1;
        c.alsu_op = alsu_op_t'(rmap[fn]);
      end
      if (fn == 25) c.halt = 1;
    end else if (op <= 22) begin
      if (imap[op] >= 0) c.alsu_op = alsu_op_t'(imap[op]);
      if ((op >= 1 && op <= 7) || (op >= 13 && op <= 14) || op == 12 || (op >= 17))
        c.write_enable = 1;
      if ((op >= 1 && op <= 6) || op == 13 || op == 15 || op >= 17) c.alsu_src_b = 1;
      if (op == 7 || op == 14) c.alsu_src_a = 1;
      if ((op >= 1 && op <= 7) || op == 14 || op >= 17) c.to_register = 1;
      if (op == 8 || op == 9) c.branch = 1;
      if (op == 9) c.branch_not_equal = 1;
      if (op == 10 || op == 12) c.jump = 1;
      if (op == 11) c.jump_reg = 1;
      if (op == 12) c.jump_and_link = 1;
      if (op == 15 || op == 16) c.write_dm = 1;
      if (op == 16) c.dm_src = 1;
    end
    return c;
  endfunction

  initial begin
    for (int op = 0; op < 64; op++) begin
      for (int fn = 0; fn < 128; fn++) begin
        ctrl_t e;
        opcode = 6'(op); funct = 7'(fn);
        #1;
        e = expected(op, fn);
        checks++;
        if (ctrl !== e) begin
          failures++;
          if (failures < 10) $display("FAIL op=%0d fn=%0d got=%h exp=%h", op, fn, ctrl, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

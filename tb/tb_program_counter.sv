// tb_program_counter: reset to 0, load on every enabled edge, hold when
// load is low (the Halt/Overflow freeze), reset again.
module tb_program_counter;
  import idea_asip_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst = 1, load = 0;
  word_t next_pc = 0, pc, model;

  program_counter dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk); @(negedge clk);
    checks++; if (pc !== 0) begin failures++; $display("FAIL reset"); end
    rst = 0; model = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      load = ($urandom % 4 != 0);
      next_pc = word_t'($urandom);
      rst = ($urandom % 97 == 0);
      @(posedge clk);
      if (rst) model = 0; else if (load) model = next_pc;
      #1;
      checks++;
      if (pc !== model) begin
        failures++;
        if (failures < 10) $display("FAIL pc=%h exp=%h", pc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_instruction_memory: writes random instructions through the load port
// at random and boundary addresses, then reads them back on the fetch port
// combinationally and compares; also checks that a read is not disturbed by
// a write to another address.
module tb_instruction_memory;
  import idea_asip_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 0;
  logic [15:0] waddr = 0, addr = 0;
  instr_t wdata = 0, instr;
  instr_t model [int];

  instruction_memory dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int addrs [$] = '{0, 1, 65535, 32768};
    for (int i = 0; i < 2000; i++) addrs.push_back(int'($urandom % 65536));
    foreach (addrs[i]) begin
      @(negedge clk);
      we = 1; waddr = 16'(addrs[i]); wdata = instr_t'($urandom);
      model[addrs[i]] = wdata;
    end
    @(negedge clk) we = 0;
    foreach (addrs[i]) begin
      addr = 16'(addrs[i]);
      #1;
      checks++;
      if (instr !== model[addrs[i]]) begin
        failures++;
        if (failures < 10) $display("FAIL addr=%h got=%h exp=%h", addr, instr, model[addrs[i]]);
      end
    end
    // write elsewhere while reading
    addr = 16'(addrs[5]);
    @(negedge clk) begin we = 1; waddr = addr + 16'd1; wdata = ~model[addrs[5]]; end
    @(posedge clk); #1;
    checks++;
    if (instr !== model[addrs[5]]) begin failures++; $display("FAIL read disturbed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_register_bank: random writes and reads on both ports against a model;
// checks that a write lands on the clock edge only, only when enabled and
// only in the addressed register.
module tb_register_bank;
  import idea_asip_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic write_enable = 0;
  logic [4:0] write_addr = 0, read_addr1 = 0, read_addr2 = 0;
  word_t write_data = 0, read_data1, read_data2;
  word_t model [32];

  register_bank dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise every register
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      write_enable = 1; write_addr = 5'(i); write_data = word_t'($urandom); model[i] = write_data;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      write_enable = 1'($urandom);
      write_addr = 5'($urandom); write_data = word_t'($urandom);
      read_addr1 = 5'($urandom); read_addr2 = ($urandom % 4 == 0) ? write_addr : 5'($urandom);
      #1;
      checks++;
      if (read_data1 !== model[read_addr1] || read_data2 !== model[read_addr2]) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d/%0d", read_addr1, read_addr2);
      end
      @(posedge clk);
      if (write_enable) model[write_addr] = write_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

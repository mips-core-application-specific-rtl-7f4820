// tb_data_memory: random write-then-read traffic on the single port against
// a model; checks that a word changes only on the clock edge of an enabled
// write and that reads are combinational.
module tb_data_memory;
  import idea_asip_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 0;
  logic [15:0] addr = 0;
  word_t wdata = 0, rdata;
  word_t model [int];

  data_memory dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int addrs [$] = '{0, 65535};
    for (int i = 0; i < 1000; i++) addrs.push_back(int'($urandom % 65536));
    foreach (addrs[i]) begin
      @(negedge clk);
      we = 1; addr = 16'(addrs[i]); wdata = word_t'($urandom);
      model[addrs[i]] = wdata;
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 3000; n++) begin
      automatic int k = int'($urandom % addrs.size());
      @(negedge clk);
      addr = 16'(addrs[k]);
      we = ($urandom % 3 == 0);
      wdata = word_t'($urandom);
      #1;
      checks++;
      if (rdata !== model[addrs[k]]) begin
        failures++;
        if (failures < 10) $display("FAIL addr=%h got=%h exp=%h", addr, rdata, model[addrs[k]]);
      end
      @(posedge clk);
      if (we) model[addrs[k]] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

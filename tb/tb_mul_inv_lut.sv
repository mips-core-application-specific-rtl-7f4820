// tb_mul_inv_lut: fills the inverse table through its write port with the
// recurrence inv[1] = 1, inv[i] = (p - (p div i) * inv[p mod i]) mod p,
// p = 65537, then reads every entry and checks x * table[x] = 1 mod p,
// with 0x0000 standing for 2^16.
module tb_mul_inv_lut;
  import idea_asip_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  we = 0;
  logic [15:0] waddr = 0, addr = 0;
  word_t wdata = 0, data;

  mul_inv_lut dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned inv [];
    inv = new[65537];
    inv[1] = 1;
    for (int i = 2; i <= 65536; i++)
      inv[i] = (65537 - ((65537 / longint'(i)) * inv[65537 % i]) % 65537) % 65537;
    for (int i = 1; i <= 65536; i++) begin
      @(negedge clk);
      we = 1; waddr = 16'(i); wdata = 16'(inv[i]);
    end
    @(negedge clk) we = 0;
    for (int x = 0; x < 65536; x++) begin
      longint unsigned xv, yv;
      addr = 16'(x);
      #1;
      xv = (x == 0) ? 65536 : x;
      yv = (data == 0) ? 65536 : data;
      checks++;
      if ((xv * yv) % 65537 != 1) begin
        failures++;
        if (failures < 10) $display("FAIL x=%h table=%h", x, data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

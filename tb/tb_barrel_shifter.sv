// tb_barrel_shifter: checks the 16-bit barrel shifter/rotator for all six
// shift kinds and all 16 shift amounts on edge and random operands against
// integer arithmetic: result, last bit shifted out (carry), and overflow,
// which only an arithmetic left shift that changes the value may raise.
module tb_barrel_shifter;
  import idea_asip_pkg::*;
  import idea_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  word_t b, f;
  logic [3:0] shamt;
  logic right, arith, rotate, ashl, carry, overflow;

  barrel_shifter dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic word_t vals [$] = '{16'h0000, 16'hFFFF, 16'h8000, 16'h7FFF, 16'h0001, 16'h4000, 16'hC000, 16'hA5A5};
    for (int i = 0; i < 300; i++) vals.push_back(word_t'($urandom));
    foreach (vals[v]) begin
      for (int kind = 10; kind <= 15; kind++) begin
        for (int s = 0; s < 16; s++) begin
          logic  eovf, ecarry;
          word_t exp;
          b = vals[v]; shamt = 4'(s);
          right  = (kind == 11 || kind == 13 || kind == 15);
          arith  = (kind == 15);
          rotate = (kind == 12 || kind == 13);
          ashl   = (kind == 14);
          #1;
          exp = alsu_ref(kind, b, b, s, eovf);
          if (kind != 14) eovf = 0;
          if (s == 0 || rotate) ecarry = 0;
          else if (right) ecarry = b[s-1];
          else ecarry = b[16-s];
          checks++;
          if (f !== exp || overflow !== eovf || carry !== ecarry) begin
            failures++;
            if (failures < 10)
              $display("FAIL kind=%0d b=%h s=%0d: f=%h exp=%h ovf=%b/%b carry=%b/%b",
                       kind, b, s, f, exp, overflow, eovf, carry, ecarry);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

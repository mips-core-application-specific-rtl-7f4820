// program_counter: 16-bit program counter register.
//
// On each rising edge of `clk` the counter takes `next_pc` when `load` is
// high and holds its value when `load` is low. The core drives `load` low
// after a HLT instruction or an arithmetic overflow, which freezes fetch on
// the current instruction. `rst` (synchronous, active high) sets the counter
// to 0, the address of the first instruction.
//
// The load input and its use for Halt and Overflow follow the published
// datapath; the reset value and synchronous reset are this design's choice.
module program_counter
  import idea_asip_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  load,
  input  word_t next_pc,
  output word_t pc
);

  always_ff @(posedge clk) begin
    if (rst)       pc <= '0;
    else if (load) pc <= next_pc;
  end

endmodule

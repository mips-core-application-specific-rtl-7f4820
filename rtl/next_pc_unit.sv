// next_pc_unit: selects the address of the next instruction.
//
// A 16-bit adder forms PC+1 and a second adder forms the branch target
// PC+1+Offset (16-bit two's complement, wrapping). A branch is taken when
// `branch` is set and the ALSU zero flag is 1 (BEQ) or, with
// `branch_not_equal`, 0 (BNE). Three 2-to-1 multiplexers then choose, in
// this order of priority from last to first: PC+1 or the branch target;
// the jump address in Offset/Data (`jump`, J and JAL); the register value
// RS (`jump_reg`, JR). `pc_plus1` also feeds the link write of JAL.
//
// Combinational. The adders and the multiplexer chain follow the published
// datapath; the polarity handling of BranchNotEqual follows the branch
// definitions of the instruction set.
module next_pc_unit
  import idea_asip_pkg::*;
(
  input  word_t pc,
  input  word_t offset,            // instruction bits 15:0
  input  word_t rs_data,           // ReadData1
  input  logic  zero_flag,         // ALSU result is zero (RS-RT for branches)
  input  logic  branch,
  input  logic  branch_not_equal,
  input  logic  jump,
  input  logic  jump_reg,
  output word_t pc_plus1,
  output word_t next_pc,
  output logic  branch_taken
);

  word_t target, seq_or_branch, after_jump;

  always_comb begin
    pc_plus1      = pc + word_t'(1);
    target        = pc_plus1 + offset;
    branch_taken  = branch & (branch_not_equal ? ~zero_flag : zero_flag);
    seq_or_branch = branch_taken ? target : pc_plus1;
    after_jump    = jump ? offset : seq_or_branch;
    next_pc       = jump_reg ? rs_data : after_jump;
  end

endmodule

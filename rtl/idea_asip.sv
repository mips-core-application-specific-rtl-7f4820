// idea_asip: single-cycle MIPS-like processor for IDEA cryptography.
//
// Every instruction is fetched, decoded and executed in one clock cycle
// (CPI = 1). Instruction and data memories are separate (Harvard); all
// storage reads combinationally and writes on the rising clock edge, which
// is what lets an instruction read its operands, use the ALSU, access data
// memory and write back in one cycle. Point-to-point wires and 2-to-1
// multiplexers (the local bus) connect the units:
//   - register write address: RT or RD (RegisterDestination);
//   - ALSU A: RS or Offset/Data (ALSUSourceA); ALSU B: RT or Offset/Data
//     (ALSUSourceB); shift amount: instruction bits 10:7;
//   - data memory: address = ALSU result, write data = RT or Offset/Data
//     (DataMemorySource);
//   - register write data: memory data or ALSU result (ToRegister), then
//     that or PC+1 (JumpAndLink);
//   - next PC from the next-PC unit (PC+1, branch, jump, jump register).
// The program counter stops loading when the control unit raises Halt or
// the ALSU raises Overflow; the core then stays on that instruction until
// reset. `halted` reports either condition.
//
// Ports beyond the published datapath, added so that the core can be used:
// `im_*` loads the instruction memory, `lut_*` fills the multiplicative
// inverse table, and `dm_host_*` lets a host read and write the data memory
// (while `dm_host_en` is high the host owns the data-memory port; use it only
// while the core is in reset or halted). While `rst` is high the core's
// register and memory writes are blocked so that the host can load memories.
// `pc`, `instr`, `overflow`, `carry_flag`, `sign_flag` and `branch_taken`
// are observation outputs. An assertion checks that the host uses the
// data-memory port only during reset or while the core is halted.
module idea_asip
  import idea_asip_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  // instruction memory load port
  input  logic   im_we,
  input  word_t  im_waddr,
  input  instr_t im_wdata,
  // multiplicative inverse table fill port
  input  logic   lut_we,
  input  word_t  lut_waddr,
  input  word_t  lut_wdata,
  // host access to data memory
  input  logic   dm_host_en,
  input  logic   dm_host_we,
  input  word_t  dm_host_addr,
  input  word_t  dm_host_wdata,
  output word_t  dm_host_rdata,
  // status
  output word_t  pc,
  output instr_t instr,
  output logic   halted,
  output logic   overflow,
  output logic   carry_flag,
  output logic   sign_flag,
  output logic   branch_taken
);

  ctrl_t ctrl;
  word_t next_pc, pc_plus1;
  word_t read_data1, read_data2, write_data;
  logic [RAW-1:0] write_addr;
  word_t alsu_a, alsu_b, alsu_result, memory_data, dm_wdata;
  word_t dm_addr, dm_din;
  logic  dm_we;
  logic  zero_flag;

  // instruction fields
  logic [5:0]     f_opcode;
  logic [RAW-1:0] f_rs, f_rt, f_rd;
  logic [3:0]     f_shift;
  logic [6:0]     f_funct;
  word_t          f_imm;
  assign f_opcode = instr[31:26];
  assign f_rs     = instr[25:21];
  assign f_rt     = instr[20:16];
  assign f_rd     = instr[15:11];
  assign f_shift  = instr[10:7];
  assign f_funct  = instr[6:0];
  assign f_imm    = instr[15:0];

  program_counter u_pc (
    .clk     (clk),
    .rst     (rst),
    .load    (~(ctrl.halt | overflow)),
    .next_pc (next_pc),
    .pc      (pc)
  );

  instruction_memory u_imem (
    .clk   (clk),
    .we    (im_we),
    .waddr (im_waddr),
    .wdata (im_wdata),
    .addr  (pc),
    .instr (instr)
  );

  control_unit u_cu (
    .opcode (f_opcode),
    .funct  (f_funct),
    .ctrl   (ctrl)
  );

  assign write_addr = ctrl.reg_dst ? f_rd : f_rt;
  assign write_data = ctrl.jump_and_link ? pc_plus1
                    : (ctrl.to_register ? alsu_result : memory_data);

  register_bank u_rf (
    .clk          (clk),
    .write_enable (ctrl.write_enable & ~rst),
    .write_addr   (write_addr),
    .write_data   (write_data),
    .read_addr1   (f_rs),
    .read_data1   (read_data1),
    .read_addr2   (f_rt),
    .read_data2   (read_data2)
  );

  assign alsu_a = ctrl.alsu_src_a ? f_imm : read_data1;
  assign alsu_b = ctrl.alsu_src_b ? f_imm : read_data2;

  alsu u_alsu (
    .clk       (clk),
    .a         (alsu_a),
    .b         (alsu_b),
    .shamt     (f_shift),
    .op        (ctrl.alsu_op),
    .result    (alsu_result),
    .overflow  (overflow),
    .carry     (carry_flag),
    .sign      (sign_flag),
    .zero      (zero_flag),
    .lut_we    (lut_we),
    .lut_waddr (lut_waddr),
    .lut_wdata (lut_wdata)
  );

  // data memory port: the core, or the host while dm_host_en is high
  assign dm_wdata = ctrl.dm_src ? f_imm : read_data2;
  assign dm_addr  = dm_host_en ? dm_host_addr  : alsu_result;
  assign dm_din   = dm_host_en ? dm_host_wdata : dm_wdata;
  assign dm_we    = dm_host_en ? dm_host_we    : (ctrl.write_dm & ~rst);

  data_memory u_dmem (
    .clk   (clk),
    .we    (dm_we),
    .addr  (dm_addr),
    .wdata (dm_din),
    .rdata (memory_data)
  );
  assign dm_host_rdata = memory_data;

  next_pc_unit u_npc (
    .pc               (pc),
    .offset           (f_imm),
    .rs_data          (read_data1),
    .zero_flag        (zero_flag),
    .branch           (ctrl.branch),
    .branch_not_equal (ctrl.branch_not_equal),
    .jump             (ctrl.jump),
    .jump_reg         (ctrl.jump_reg),
    .pc_plus1         (pc_plus1),
    .next_pc          (next_pc),
    .branch_taken     (branch_taken)
  );

  assign halted = ctrl.halt | overflow;

  // The host may take the data-memory port only while the core cannot use
  // it: in reset or halted.
  host_port_when_idle: assert property (@(posedge clk) dm_host_en |-> (rst || halted))
    else $error("data memory accessed by the host while the core runs");

endmodule

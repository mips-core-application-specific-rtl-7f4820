// idea_asip_pkg: types and constants shared by the IDEA crypto processor.
//
// The processor is a single-cycle, Harvard, MIPS-like core with a 16-bit
// datapath and 32-bit instructions. This package holds the instruction field
// positions, the opcode and function-code numbers of the instruction set, the
// 5-bit ALSU operation codes and the bundle of control signals that the
// hardwired control unit drives into the datapath.
//
// Opcode, function and ALSU operation numbers and the field positions
// (Opcode 31:26, RS 25:21, RT 20:16, RD 15:11, Shift 10:7, Function 6:0,
// Offset/Data 15:0) follow the published instruction set. The control-signal
// names are those of the datapath drawing; packing them into one struct is
// this design's choice.
package idea_asip_pkg;

  localparam int unsigned XLEN   = 16;  // datapath width
  localparam int unsigned ILEN   = 32;  // instruction width
  localparam int unsigned NREGS  = 32;  // register bank size
  localparam int unsigned RAW    = 5;   // register address width

  typedef logic [XLEN-1:0] word_t;
  typedef logic [ILEN-1:0] instr_t;

  // ALSU operation codes (ALSUOpcode). 27..31 are reserved and give 0.
  typedef enum logic [4:0] {
    ALSU_ADD   = 5'd0,   // A+B            (signed, overflow checked)
    ALSU_DEC   = 5'd1,   // A-1
    ALSU_SUB   = 5'd2,   // A-B
    ALSU_INC   = 5'd3,   // A+1
    ALSU_ADDM  = 5'd4,   // (A+B) mod 2^16 (no overflow)
    ALSU_ADI   = 5'd5,   // (2^16-B) & 0xFFFF
    ALSU_MUL   = 5'd6,   // low half of A*B (signed, overflow checked)
    ALSU_MULM  = 5'd7,   // A*B mod 2^16+1, 0 stands for 2^16
    ALSU_DIV   = 5'd8,   // A \ B
    ALSU_MOD   = 5'd9,   // A mod B
    ALSU_SHL   = 5'd10,  // SHL(B)
    ALSU_SHR   = 5'd11,  // SHR(B)
    ALSU_ROL   = 5'd12,  // ROL(B)
    ALSU_ROR   = 5'd13,  // ROR(B)
    ALSU_ASHL  = 5'd14,  // ASHL(B), overflow checked
    ALSU_ASHR  = 5'd15,  // ASHR(B)
    ALSU_PASS  = 5'd16,  // A
    ALSU_NOT   = 5'd17,  // ~A
    ALSU_AND   = 5'd18,
    ALSU_NAND  = 5'd19,
    ALSU_OR    = 5'd20,
    ALSU_NOR   = 5'd21,
    ALSU_XOR   = 5'd22,
    ALSU_XNOR  = 5'd23,
    ALSU_SLT   = 5'd24,  // A<B ? 0xFFFF : 0x0000
    ALSU_SUBNV = 5'd25,  // A-B, overflow ignored (branches)
    ALSU_MUI   = 5'd26   // multiplicative inverse of A (lookup table)
  } alsu_op_t;

  // Instruction opcodes (bits 31:26).
  typedef enum logic [5:0] {
    OP_RTYPE = 6'd0,
    OP_ANDI  = 6'd1,  OP_NANDI = 6'd2,  OP_ORI   = 6'd3,  OP_NORI  = 6'd4,
    OP_XORI  = 6'd5,  OP_XNORI = 6'd6,  OP_INVI  = 6'd7,
    OP_BEQ   = 6'd8,  OP_BNE   = 6'd9,  OP_J     = 6'd10, OP_JR    = 6'd11,
    OP_JAL   = 6'd12, OP_LW    = 6'd13, OP_LWI   = 6'd14, OP_SW    = 6'd15,
    OP_SWI   = 6'd16, OP_ADDI  = 6'd17, OP_SUBI  = 6'd18, OP_MULI  = 6'd19,
    OP_DIVI  = 6'd20, OP_MODI  = 6'd21, OP_SLTI  = 6'd22
  } opcode_t;

  // R-type function codes (bits 6:0).
  typedef enum logic [6:0] {
    F_AND  = 7'd0,  F_NAND = 7'd1,  F_OR   = 7'd2,  F_NOR  = 7'd3,
    F_XOR  = 7'd4,  F_XNOR = 7'd5,  F_INV  = 7'd6,  F_SHL  = 7'd7,
    F_SHR  = 7'd8,  F_ASHL = 7'd9,  F_ASHR = 7'd10, F_ROL  = 7'd11,
    F_ROR  = 7'd12, F_ADD  = 7'd13, F_SUB  = 7'd14, F_MUL  = 7'd15,
    F_DIV  = 7'd16, F_MOD  = 7'd17, F_INC  = 7'd18, F_DEC  = 7'd19,
    F_SLT  = 7'd20, F_ADDM = 7'd21, F_MULM = 7'd22, F_ADI  = 7'd23,
    F_MUI  = 7'd24, F_HLT  = 7'd25
  } funct_t;

  // Control signals of the datapath, one field per signal of the drawing.
  typedef struct packed {
    logic     reg_dst;           // RegisterDestination: 0 = RT, 1 = RD
    logic     write_enable;      // WriteEnable of the register bank
    logic     alsu_src_a;        // ALSUSourceA: 0 = ReadData1, 1 = Offset/Data
    logic     alsu_src_b;        // ALSUSourceB: 0 = ReadData2, 1 = Offset/Data
    logic     dm_src;            // DataMemorySource: 0 = ReadData2, 1 = Offset/Data
    logic     write_dm;          // WriteDM
    logic     to_register;       // ToRegister: 0 = MemoryData, 1 = ALSUResult
    logic     halt;              // Halt
    logic     jump_and_link;     // JumpAndLink: write PC+1 to the register bank
    logic     branch_not_equal;  // BranchNotEqual
    logic     branch;            // Branch
    logic     jump;              // Jump: PC <- Offset/Data
    logic     jump_reg;          // JumpReg: PC <- ReadData1
    alsu_op_t alsu_op;           // ALSUOpcode
  } ctrl_t;

endpackage

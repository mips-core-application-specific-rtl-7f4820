// control_unit: hardwired, purely combinational instruction decoder.
//
// From the 6-bit Opcode (instruction bits 31:26) and the 7-bit Function
// (bits 6:0) it produces the control bundle `ctrl` for one instruction:
// register destination and write enable, the two ALSU operand selects, the
// data-memory write-data select and write enable, ToRegister, Halt,
// JumpAndLink, Branch, BranchNotEqual, Jump, JumpReg and the ALSU operation.
//
// R-type instructions (Opcode 0) write RD with an ALSU result computed from
// RS and RT; I-type instructions use the 16-bit Offset/Data field as the
// A operand (INVI, LWI) or the B operand (immediate arithmetic and logic,
// address offset of LW/SW). Branches compare RS and RT with the
// non-overflowing subtraction, so a branch never freezes the core.
// ToRegister is formed exactly by the published rule:
//   (Opcode = 0 and Function = 0..24) or Opcode = 1..7 or Opcode = 14
//   or Opcode = 17..22.
// Undefined opcodes and functions decode to a no-operation.
//
// Opcode/function numbers and signal names follow the published instruction
// set and datapath. The ALSU operation chosen for instructions whose table
// entry does not name one is this design's choice: LW/SW form the address
// with the modulo-2^16 addition (unsigned addresses never overflow), SWI
// passes RS to the address, J/JR/JAL/HLT select the non-flagging transfer.
module control_unit
  import idea_asip_pkg::*;
(
  input  logic [5:0] opcode,
  input  logic [6:0] funct,
  output ctrl_t      ctrl
);

  always_comb begin
    ctrl         = '0;
    ctrl.alsu_op = ALSU_PASS;
    if (opcode == OP_RTYPE) begin
      if (funct <= 7'(F_MUI)) begin
        ctrl.reg_dst      = 1'b1;
        ctrl.write_enable = 1'b1;
      end
      unique case (funct)
        F_AND:  ctrl.alsu_op = ALSU_AND;
        F_NAND: ctrl.alsu_op = ALSU_NAND;
        F_OR:   ctrl.alsu_op = ALSU_OR;
        F_NOR:  ctrl.alsu_op = ALSU_NOR;
        F_XOR:  ctrl.alsu_op = ALSU_XOR;
        F_XNOR: ctrl.alsu_op = ALSU_XNOR;
        F_INV:  ctrl.alsu_op = ALSU_NOT;
        F_SHL:  ctrl.alsu_op = ALSU_SHL;
        F_SHR:  ctrl.alsu_op = ALSU_SHR;
        F_ASHL: ctrl.alsu_op = ALSU_ASHL;
        F_ASHR: ctrl.alsu_op = ALSU_ASHR;
        F_ROL:  ctrl.alsu_op = ALSU_ROL;
        F_ROR:  ctrl.alsu_op = ALSU_ROR;
        F_ADD:  ctrl.alsu_op = ALSU_ADD;
        F_SUB:  ctrl.alsu_op = ALSU_SUB;
        F_MUL:  ctrl.alsu_op = ALSU_MUL;
        F_DIV:  ctrl.alsu_op = ALSU_DIV;
        F_MOD:  ctrl.alsu_op = ALSU_MOD;
        F_INC:  ctrl.alsu_op = ALSU_INC;
        F_DEC:  ctrl.alsu_op = ALSU_DEC;
        F_SLT:  ctrl.alsu_op = ALSU_SLT;
        F_ADDM: ctrl.alsu_op = ALSU_ADDM;
        F_MULM: ctrl.alsu_op = ALSU_MULM;
        F_ADI:  ctrl.alsu_op = ALSU_ADI;
        F_MUI:  ctrl.alsu_op = ALSU_MUI;
        F_HLT:  ctrl.halt    = 1'b1;
        default: ;
      endcase
    end else begin
      unique case (opcode)
        OP_ANDI, OP_NANDI, OP_ORI, OP_NORI, OP_XORI, OP_XNORI,
        OP_ADDI, OP_SUBI, OP_MULI, OP_DIVI, OP_MODI, OP_SLTI: begin
          ctrl.write_enable = 1'b1;
          ctrl.alsu_src_b   = 1'b1;
          unique case (opcode)
            OP_ANDI:  ctrl.alsu_op = ALSU_AND;
            OP_NANDI: ctrl.alsu_op = ALSU_NAND;
            OP_ORI:   ctrl.alsu_op = ALSU_OR;
            OP_NORI:  ctrl.alsu_op = ALSU_NOR;
            OP_XORI:  ctrl.alsu_op = ALSU_XOR;
            OP_XNORI: ctrl.alsu_op = ALSU_XNOR;
            OP_ADDI:  ctrl.alsu_op = ALSU_ADD;
            OP_SUBI:  ctrl.alsu_op = ALSU_SUB;
            OP_MULI:  ctrl.alsu_op = ALSU_MUL;
            OP_DIVI:  ctrl.alsu_op = ALSU_DIV;
            OP_MODI:  ctrl.alsu_op = ALSU_MOD;
            default:  ctrl.alsu_op = ALSU_SLT;
          endcase
        end
        OP_INVI: begin
          ctrl.write_enable = 1'b1;
          ctrl.alsu_src_a   = 1'b1;
          ctrl.alsu_op      = ALSU_NOT;
        end
        OP_BEQ, OP_BNE: begin
          ctrl.branch           = 1'b1;
          ctrl.branch_not_equal = (opcode == OP_BNE);
          ctrl.alsu_op          = ALSU_SUBNV;
        end
        OP_J:   ctrl.jump     = 1'b1;
        OP_JR:  ctrl.jump_reg = 1'b1;
        OP_JAL: begin
          ctrl.jump          = 1'b1;
          ctrl.jump_and_link = 1'b1;
          ctrl.write_enable  = 1'b1;
        end
        OP_LW: begin
          ctrl.write_enable = 1'b1;
          ctrl.alsu_src_b   = 1'b1;
          ctrl.alsu_op      = ALSU_ADDM;
        end
        OP_LWI: begin
          ctrl.write_enable = 1'b1;
          ctrl.alsu_src_a   = 1'b1;
        end
        OP_SW: begin
          ctrl.write_dm   = 1'b1;
          ctrl.alsu_src_b = 1'b1;
          ctrl.alsu_op    = ALSU_ADDM;
        end
        OP_SWI: begin
          ctrl.write_dm = 1'b1;
          ctrl.dm_src   = 1'b1;
        end
        default: ;
      endcase
    end
    // ToRegister, as published
    ctrl.to_register = (opcode == 6'd0 && funct <= 7'd24)
                     || (opcode >= 6'd1 && opcode <= 6'd7)
                     || (opcode == 6'd14)
                     || (opcode >= 6'd17 && opcode <= 6'd22);
  end

endmodule

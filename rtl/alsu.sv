// alsu: 16-bit Arithmetic Logic Shift Unit of the IDEA crypto processor.
//
// The 5-bit operation code `op` selects one of 27 results through a 32-to-1
// multiplexer (codes 27..31 are reserved and give 0):
//   0..3   A+B, A-1, A-B, A+1 on one adder whose B input is chosen by
//          op[1:0] among B, 0xFFFF, ~B, 0x0000 with carry-in op[1];
//          signed overflow and carry are reported.
//   4      (A+B) mod 2^16, never overflows (IDEA addition).
//   5      (2^16-B) & 0xFFFF, the additive inverse used for IDEA decryption.
//   6      low 16 bits of the signed product A*B; overflow when the product
//          does not fit in 16 signed bits.
//   7      A*B mod 2^16+1 with 0x0000 standing for 2^16 (IDEA multiplication),
//          never overflows.
//   8, 9   signed quotient (truncated) and remainder of A/B.
//   10..15 SHL, SHR, ROL, ROR, ASHL, ASHR of B by `shamt` in the barrel
//          shifter; ASHL may overflow, rotations have no carry.
//   16..23 A, ~A, AND, NAND, OR, NOR, XOR, XNOR.
//   24     0xFFFF if A<B (signed) else 0x0000: B is subtracted from A and
//          the sign of the difference is XORed with the overflow.
//   25     A-B with overflow ignored (compare for branches).
//   26     multiplicative inverse of A mod 2^16+1 from a 65536-entry table.
// Flags: `overflow`, `carry`, `sign` (result MSB) and `zero` (result = 0).
//
// The datapath is combinational; only the inverse table has a clocked
// write port (`lut_*`) used to fill it. Operation list, adder input
// multiplexer, the choice of which operations may overflow, and the
// set-on-less-than rule follow the published ALSU. Choices of this design:
// division by zero gives quotient 0xFFFF and remainder A; 0x8000 / -1 gives
// 0x8000 with remainder 0 and no flag; SLT returns 0xFFFF (as the ALSU text
// says) rather than 1 (as the instruction table says).
module alsu
  import idea_asip_pkg::*;
(
  input  logic       clk,
  input  word_t      a,
  input  word_t      b,
  input  logic [3:0] shamt,
  input  alsu_op_t   op,
  output word_t      result,
  output logic       overflow,
  output logic       carry,
  output logic       sign,
  output logic       zero,
  // inverse-table fill port
  input  logic       lut_we,
  input  word_t      lut_waddr,
  input  word_t      lut_wdata
);

  // ---- shared adder for ops 0..3 ----------------------------------------
  word_t          add_b;
  logic [XLEN:0]  add_sum;
  logic           add_ovf;
  always_comb begin
    unique case (op[1:0])
      2'd0: add_b = b;
      2'd1: add_b = 16'hFFFF;
      2'd2: add_b = ~b;
      default: add_b = 16'h0000;
    endcase
    add_sum = {1'b0, a} + {1'b0, add_b} + {16'b0, op[1]};
    add_ovf = (a[XLEN-1] == add_b[XLEN-1]) && (add_sum[XLEN-1] != a[XLEN-1]);
  end

  // ---- compare adder (ops 24, 25) --------------------------------------
  logic [XLEN:0] cmp_sum;
  logic          cmp_ovf, less;
  always_comb begin
    cmp_sum = {1'b0, a} + {1'b0, ~b} + 17'd1;
    // overflow = c16 xor c15, written as the sign-rule equivalent
    cmp_ovf = (a[XLEN-1] != b[XLEN-1]) && (cmp_sum[XLEN-1] != a[XLEN-1]);
    less    = cmp_ovf ^ cmp_sum[XLEN-1];
  end

  // ---- signed multiplier (op 6) ----------------------------------------
  logic signed [2*XLEN-1:0] mul_p;
  logic                     mul_ovf;
  always_comb begin
    mul_p   = $signed(a) * $signed(b);
    mul_ovf = (mul_p[2*XLEN-1:XLEN-1] != '0) && (mul_p[2*XLEN-1:XLEN-1] != '1);
  end

  // ---- IDEA multiplication mod 2^16+1 (op 7) ---------------------------
  logic [XLEN:0]     ma, mb;
  logic [2*XLEN+1:0] mm_p;
  word_t             mm_r;
  always_comb begin
    ma   = (a == '0) ? 17'h10000 : {1'b0, a};
    mb   = (b == '0) ? 17'h10000 : {1'b0, b};
    mm_p = {17'b0, ma} * {17'b0, mb};
    mm_r = word_t'(mm_p % 34'd65537);  // 2^16 keeps only 0x0000
  end

  // ---- signed divider (ops 8, 9) ---------------------------------------
  word_t quot, rem;
  always_comb begin
    if (b == '0) begin
      quot = 16'hFFFF;
      rem  = a;
    end else if (a == 16'h8000 && b == 16'hFFFF) begin
      quot = 16'h8000;
      rem  = '0;
    end else begin
      quot = word_t'($signed(a) / $signed(b));
      rem  = word_t'($signed(a) % $signed(b));
    end
  end

  // ---- barrel shifter (ops 10..15) -------------------------------------
  word_t sh_f;
  logic  sh_carry, sh_ovf;
  barrel_shifter u_shifter (
    .b        (b),
    .shamt    (shamt),
    .right    (op == ALSU_SHR || op == ALSU_ROR || op == ALSU_ASHR),
    .arith    (op == ALSU_ASHR),
    .rotate   (op == ALSU_ROL || op == ALSU_ROR),
    .ashl     (op == ALSU_ASHL),
    .f        (sh_f),
    .carry    (sh_carry),
    .overflow (sh_ovf)
  );

  // ---- multiplicative inverse table (op 26) ----------------------------
  word_t inv;
  mul_inv_lut u_lut (
    .clk   (clk),
    .we    (lut_we),
    .waddr (lut_waddr),
    .wdata (lut_wdata),
    .addr  (a),
    .data  (inv)
  );

  // ---- result multiplexer and flags ------------------------------------
  logic is_add, is_shift;
  always_comb begin
    is_add   = (op <= ALSU_INC);
    is_shift = (op >= ALSU_SHL) && (op <= ALSU_ASHR);
    unique case (op)
      ALSU_ADD, ALSU_DEC, ALSU_SUB, ALSU_INC: result = add_sum[XLEN-1:0];
      ALSU_ADDM:  result = a + b;
      ALSU_ADI:   result = word_t'(17'h10000 - {1'b0, b});
      ALSU_MUL:   result = mul_p[XLEN-1:0];
      ALSU_MULM:  result = mm_r;
      ALSU_DIV:   result = quot;
      ALSU_MOD:   result = rem;
      ALSU_SHL, ALSU_SHR, ALSU_ROL, ALSU_ROR, ALSU_ASHL, ALSU_ASHR:
                  result = sh_f;
      ALSU_PASS:  result = a;
      ALSU_NOT:   result = ~a;
      ALSU_AND:   result = a & b;
      ALSU_NAND:  result = ~(a & b);
      ALSU_OR:    result = a | b;
      ALSU_NOR:   result = ~(a | b);
      ALSU_XOR:   result = a ^ b;
      ALSU_XNOR:  result = ~(a ^ b);
      ALSU_SLT:   result = less ? 16'hFFFF : 16'h0000;
      ALSU_SUBNV: result = cmp_sum[XLEN-1:0];
      ALSU_MUI:   result = inv;
      default:    result = '0;               // reserved codes 27..31
    endcase
    overflow = (is_add & add_ovf) | ((op == ALSU_MUL) & mul_ovf) | sh_ovf;
    carry    = (is_add & add_sum[XLEN]) | (is_shift & sh_carry);
    sign     = result[XLEN-1];
    zero     = (result == '0);
  end

endmodule

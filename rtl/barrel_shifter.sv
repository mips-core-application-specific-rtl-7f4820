// barrel_shifter: 16-bit bidirectional barrel shifter and rotator.
//
// The core shifts or rotates only to the left, in four stages that move the
// word by 1, 2, 4 and 8 places when the matching bit of the 4-bit shift
// amount is set. A right shift or rotation is made by reversing the bit order
// of the operand before the core and of the result after it. The bits that
// enter at the low end are zeros for logical shifts, copies of the operand's
// sign bit for an arithmetic right shift, and the bits leaving the high end
// for a rotation.
//
// Flags: `carry` is the last bit shifted out (0 when the amount is 0 and
// always 0 in a rotation). `overflow` is raised only for an arithmetic left
// shift: a stage that moves the word by k places overflows when the k+1 top
// bits of its input are not all equal, so that the sign would change.
//
// Purely combinational. The stage structure, the data-reversal units, the
// ASHR/Rotate fill selection and the ASHL-only overflow follow the published
// shifter drawing; the exact carry and overflow equations are this design's
// reading of it.
module barrel_shifter
  import idea_asip_pkg::*;
(
  input  word_t      b,        // operand
  input  logic [3:0] shamt,    // shift amount, 0..15
  input  logic       right,    // Data Reversal: shift/rotate to the right
  input  logic       arith,    // ASHR: replicate the sign bit
  input  logic       rotate,   // Rotate: re-enter the bits shifted out
  input  logic       ashl,     // ASHL: report overflow
  output word_t      f,        // result
  output logic       carry,
  output logic       overflow
);

  function automatic word_t reverse(input word_t x);
    word_t r;
    for (int i = 0; i < XLEN; i++) r[i] = x[XLEN-1-i];
    return r;
  endfunction

  word_t       stage [5];
  logic  [4:0] cy;
  logic  [3:0] ov;
  logic        fill;

  always_comb begin
    fill     = arith & b[XLEN-1];
    stage[0] = right ? reverse(b) : b;
    cy[0]    = 1'b0;
    for (int k = 0; k < 4; k++) begin
      automatic int    n = 1 << k;
      automatic word_t s = stage[k];
      automatic word_t t = s << n;
      automatic word_t top_mask = ~(word_t'('1) >> (n + 1));  // top n+1 bits
      for (int i = 0; i < n; i++) t[i] = rotate ? s[XLEN-n+i] : fill;
      if (shamt[k]) begin
        stage[k+1] = t;
        cy[k+1]    = s[XLEN-n];
        ov[k]      = ((s & top_mask) != 0) && ((s & top_mask) != top_mask);
      end else begin
        stage[k+1] = s;
        cy[k+1]    = cy[k];
        ov[k]      = 1'b0;
      end
    end
    f        = right ? reverse(stage[4]) : stage[4];
    carry    = cy[4] & ~rotate;
    overflow = ashl & (|ov);
  end

endmodule

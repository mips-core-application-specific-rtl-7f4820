// mul_inv_lut: lookup table of multiplicative inverses modulo 2^16+1.
//
// Entry x holds the 16-bit word y with x*y = 1 (mod 65537), where the word
// 0x0000 stands for 2^16 as everywhere in IDEA; so entry 0 holds 0 and
// entry 1 holds 1. The table replaces an extended-Euclid or binary-GCD
// computation by one asynchronous memory read.
//
// Interface: `addr` -> `data` is a combinational read. The table is a RAM
// array with one synchronous write port (`we`, `waddr`, `wdata` on the rising
// edge of `clk`) through which it is filled once, after power-up and before
// the first MUI instruction. A table of inverses can be generated by the
// recurrence inv[1] = 1, inv[i] = (p - (p div i) * inv[p mod i]) mod p with
// p = 65537, and stored as entry (i mod 2^16).
//
// That the inverse comes from a 65536-entry table follows the published
// design; how the table is filled (a write port rather than contents fixed at
// build time) is this design's choice.
module mul_inv_lut
  import idea_asip_pkg::*;
#(
  parameter int unsigned ADDR_W = 16   // 2^16 entries, one per 16-bit value
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  word_t             wdata,
  input  logic [ADDR_W-1:0] addr,
  output word_t             data
);

  word_t mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign data = mem[addr];

endmodule

// instruction_memory: 2^16 x 32-bit program store.
//
// The program counter addresses it directly (one word per instruction) and
// the instruction appears combinationally at `instr`, so fetch fits in the
// single cycle of an instruction. The core only reads it. A synchronous
// write port (`we`, `waddr`, `wdata`, rising edge of `clk`) loads the
// program before the core is released from reset.
//
// Size and asynchronous read follow the published design, which calls the
// store a ROM and states that all storage units read asynchronously and
// write synchronously; the separate loading port is this design's choice.
module instruction_memory
  import idea_asip_pkg::*;
#(
  parameter int unsigned ADDR_W = 16   // 2^16 instructions
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  instr_t            wdata,
  input  logic [ADDR_W-1:0] addr,
  output instr_t            instr
);

  instr_t mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign instr = mem[addr];

endmodule

// data_memory: 2^16 x 16-bit data RAM.
//
// One port: `addr` selects a word that appears combinationally at `rdata`;
// when `we` is high, `wdata` is written to that word on the rising edge of
// `clk`. Loads and stores of the core address it with the ALSU result, so a
// load completes in the cycle it is issued.
//
// Size, asynchronous read and synchronous write follow the published design.
// There is no reset: software or the host initialises what it reads.
module data_memory
  import idea_asip_pkg::*;
#(
  parameter int unsigned ADDR_W = 16   // 2^16 words
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  word_t             wdata,
  output word_t             rdata
);

  word_t mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
  end

  assign rdata = mem[addr];

endmodule

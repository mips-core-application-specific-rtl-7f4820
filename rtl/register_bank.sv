// register_bank: 32 x 16-bit register file with two read ports and one
// write port.
//
// A 5-to-32 decoder enabled by `write_enable` loads `write_data` into the
// register selected by `write_addr` on the rising clock edge; two 32-to-1
// multiplexers read the registers named by `read_addr1` (RS) and
// `read_addr2` (RT) combinationally, so an instruction reads its operands
// and writes its result in the same cycle. A read of the register being
// written returns the old value until the edge.
//
// All registers are general purpose (none is tied to zero) and none is
// reset, as in the published register-bank drawing; software initialises
// every register it reads.
module register_bank
  import idea_asip_pkg::*;
#(
  parameter int unsigned N      = NREGS,  // number of registers
  parameter int unsigned ADDR_W = RAW     // address width, log2(N)
) (
  input  logic              clk,
  input  logic              write_enable,
  input  logic [ADDR_W-1:0] write_addr,
  input  word_t             write_data,
  input  logic [ADDR_W-1:0] read_addr1,
  output word_t             read_data1,
  input  logic [ADDR_W-1:0] read_addr2,
  output word_t             read_data2
);

  word_t regs [N];

  always_ff @(posedge clk) begin
    if (write_enable) regs[write_addr] <= write_data;
  end

  assign read_data1 = regs[read_addr1];
  assign read_data2 = regs[read_addr2];

endmodule

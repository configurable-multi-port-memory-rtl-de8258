// Single-port SRAM macro (6T array), 16 Kb by default.
//
// One access per mclk cycle: with ce and we high, din is written to addr at
// the rising mclk edge that ends the cycle; dout always shows the word at addr
// within the same cycle. This stands for a macro whose self-timed access fits
// in one slot of the wrapper. The array is written as a plain memory so that
// it simulates and synthesizes; in silicon it is the conventional 6T macro.
// The 512 x 32 organisation is this design's choice; the 16 Kb total follows
// the published design. Contents are not reset.
module sram_macro
  import mpm_pkg::*;
#(
  parameter int unsigned ADDR_W = ADDR_W_DEF,
  parameter int unsigned DATA_W = DATA_W_DEF,
  parameter int unsigned DEPTH  = 2 ** ADDR_W
) (
  input  logic              mclk,  // memory access clock
  input  logic              ce,    // access enable
  input  logic              we,    // 1 = write, 0 = read
  input  logic [ADDR_W-1:0] addr,  // word address
  input  logic [DATA_W-1:0] din,   // write data
  output logic [DATA_W-1:0] dout   // read data
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge mclk) begin
    if (ce && we) mem[addr] <= din;
  end

  assign dout = mem[addr];

endmodule

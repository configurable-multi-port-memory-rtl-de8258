// CLKP generator: a one-cycle pulse at every rising edge of the port clock.
//
// The external port clock CLK is sampled in the memory clock (mclk) domain;
// CLK must be generated synchronously to mclk (for example by dividing it).
// CLKP is high during the first mclk cycle in which CLK is high:
//     clkp = ext_clk & ~ext_clk_q
// where ext_clk_q is CLK delayed by one mclk cycle. CLKP is combinational
// from ext_clk, so it is high in the same mclk cycle in which CLK rises.
//
// In the original circuit this spike comes from CLK and a delayed, inverted
// copy of CLK through a short delay chain. Replacing the analog delay chain
// with one mclk period of delay is this design's choice; the function, a spike
// at each CLK rising edge that opens the input latches and reloads the port
// sequencing, follows the published design.
module clkp_gen (
  input  logic mclk,     // memory access clock
  input  logic rst_n,    // asynchronous active-low reset
  input  logic ext_clk,  // external port clock CLK, synchronous to mclk
  output logic clkp      // CLKP: high for one mclk cycle after CLK rises
);

  logic ext_clk_q;

  always_ff @(posedge mclk or negedge rst_n) begin
    if (!rst_n) ext_clk_q <= 1'b0;
    else        ext_clk_q <= ext_clk;
  end

  assign clkp = ext_clk & ~ext_clk_q;

endmodule

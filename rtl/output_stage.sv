// Output stage of one port: output register and output latch.
//
// The output register captures the SRAM read data at the end of the port's
// access slot (cap = BACK and the decoder output of this port). The output
// latch passes the register to the port's r_data once per port-clock period,
// at the end of the CLKP cycle. So data read in period k reaches r_data one
// mclk cycle after the CLK edge that starts period k+1 and stays there for
// one period. The two ranks and when each is loaded follow the published
// design; the exact cycle of the latch transfer and the reset value are this
// design's choices.
module output_stage
  import mpm_pkg::*;
#(
  parameter int unsigned DATA_W = DATA_W_DEF
) (
  input  logic              mclk,    // memory access clock
  input  logic              rst_n,   // asynchronous active-low reset
  input  logic              cap,     // capture SRAM data (BACK and decoder)
  input  logic              clkp,    // CLKP: transfer register to r_data
  input  logic [DATA_W-1:0] din,     // SRAM read data
  output logic [DATA_W-1:0] r_data   // read data at the port
);

  logic [DATA_W-1:0] out_reg;

  always_ff @(posedge mclk or negedge rst_n) begin
    if (!rst_n) begin
      out_reg <= '0;
      r_data  <= '0;
    end else begin
      if (cap)  out_reg <= din;
      if (clkp) r_data  <= out_reg;
    end
  end

endmodule

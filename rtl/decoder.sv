// Output-register decoder.
//
// Turns the FSM select lines into a one-hot enable for the output register of
// the selected port. The top enables it with BACK and a read of an enabled
// port, so only the register of the port being read captures the SRAM data.
// Gating by read is this design's choice. Purely combinational.
module decoder
  import mpm_pkg::*;
(
  input  port_sel_t         sel,  // FSM select lines
  input  logic              en,   // decoder enable
  output logic [NPORTS-1:0] oh    // one-hot output-register enable
);

  always_comb begin
    oh = '0;
    if (en) oh[sel] = 1'b1;
  end

endmodule

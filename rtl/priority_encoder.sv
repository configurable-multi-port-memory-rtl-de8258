// Priority encoder: index of the highest-priority enabled port.
//
// Fixed priority A > B > C > D (bit 0 = A), as in the published example.
// The FSM loads this index at every CLKP, so each port-clock period starts
// with the highest-priority enabled port. With no port enabled, sel = A and
// valid = 0. Purely combinational.
module priority_encoder
  import mpm_pkg::*;
(
  input  logic [NPORTS-1:0] port_en,  // port enables, bit 0 = port A
  output port_sel_t         sel,      // first enabled port
  output logic              valid     // some port is enabled
);

  always_comb begin
    sel = PORT_A;
    for (int i = NPORTS - 1; i >= 0; i--)
      if (port_en[i]) sel = port_sel_t'(i);
    valid = |port_en;
  end

endmodule

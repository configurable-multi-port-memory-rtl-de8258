// Enabled-port counter ("N ports en").
//
// Counts the enabled ports and encodes the count for the clock generator as
// B1B0 = count - 1: 00 = 1 port, 01 = 2 ports, 10 = 3 ports, 11 = 4 ports,
// the code of the published design. The count itself is also given on n_en.
// With no port enabled b is 00 and n_en is 0; the top then makes no access.
// Purely combinational (a population count).
module port_counter
  import mpm_pkg::*;
(
  input  logic [NPORTS-1:0] port_en,  // port enables, bit 0 = port A
  output logic [1:0]        b,        // B1B0 = enabled ports - 1
  output logic [2:0]        n_en      // number of enabled ports, 0..4
);

  always_comb begin
    n_en = '0;
    for (int i = 0; i < NPORTS; i++) n_en += {2'b00, port_en[i]};
    b = (n_en == 3'd0) ? 2'b00 : 2'(n_en - 3'd1);
  end

endmodule

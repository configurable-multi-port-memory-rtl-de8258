// Shared constants and types of the pseudo-quad-port SRAM wrapper.
//
// The wrapper serves four ports, A to D, from one single-port SRAM macro by
// visiting the enabled ports one after another inside each period of the
// external port clock. Port A has the highest priority and is served first.
// Port index 0 is A, 1 is B, 2 is C, 3 is D in every port-indexed vector.
//
// The default word organisation (512 x 32 = 16 Kb) is this design's choice;
// only the 16 Kb total comes from the published description.
package mpm_pkg;

  // Number of ports. The FSM transitions and the 2-bit port-count code are
  // defined for exactly four ports.
  localparam int unsigned NPORTS = 4;

  // Default SRAM organisation: 2**9 words of 32 bits = 16384 bits.
  localparam int unsigned ADDR_W_DEF = 9;
  localparam int unsigned DATA_W_DEF = 32;

  // FSM state = index of the port connected to the SRAM macro.
  typedef enum logic [1:0] {
    PORT_A = 2'd0,
    PORT_B = 2'd1,
    PORT_C = 2'd2,
    PORT_D = 2'd3
  } port_sel_t;

endpackage

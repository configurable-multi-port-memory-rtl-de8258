// Port FSM: which port is connected to the SRAM macro.
//
// The state is the index of the port being served and drives the MUX and
// decoder select lines. At every CLKP the state is loaded with the priority
// encoder output, the highest-priority enabled port. At every CLK2 it moves to
// the next enabled port of lower priority. The transitions are those of the
// published state diagram, whose input strings list port_en of A,B,C,D from
// left to right (x = don't care):
//   A -> B on x1xx,  A -> C on x01x,  A -> D on x001
//   B -> C on xx1x,  B -> D on xx01
//   C -> D on xxx1
// Any other CLK2 leaves the state where it is. Port A's own enable is never
// needed (A is only ever left, never entered, by a CLK2), so port_en[0] is
// unused here.
//
// Timing: the load at CLKP is "asynchronous": during the CLKP cycle the
// select lines already show the priority encoder output, which is stored at
// the end of that cycle (or its successor, if CLK2 is also high then).
// State encoding and reset value (port A) are this design's choices.
module port_fsm
  import mpm_pkg::*;
(
  input  logic              mclk,     // memory access clock
  input  logic              rst_n,    // asynchronous active-low reset
  input  logic              clkp,     // load highest-priority port
  input  port_sel_t         pe_sel,   // priority encoder output
  input  logic              clk2,     // advance strobe
  input  logic [NPORTS-1:0] port_en,  // latched port enables, bit 0 = A
  output port_sel_t         sel       // select lines (current state)
);

  port_sel_t state_q, nxt;

  assign sel = clkp ? pe_sel : state_q;

  always_comb begin
    nxt = sel;
    unique case (sel)
      PORT_A: begin
        if      (port_en[1])                             nxt = PORT_B;  // x1xx
        else if (port_en[2])                             nxt = PORT_C;  // x01x
        else if (port_en[3])                             nxt = PORT_D;  // x001
      end
      PORT_B: begin
        if      (port_en[2])                             nxt = PORT_C;  // xx1x
        else if (port_en[3])                             nxt = PORT_D;  // xx01
      end
      PORT_C: if (port_en[3])                            nxt = PORT_D;  // xxx1
      PORT_D: ;
    endcase
  end

  always_ff @(posedge mclk or negedge rst_n) begin
    if (!rst_n)    state_q <= PORT_A;
    else if (clk2) state_q <= nxt;
    else           state_q <= sel;
  end

endmodule

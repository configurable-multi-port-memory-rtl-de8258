// Input latch: holds one port's request for a whole port-clock period.
//
// Function: transparent while CLKP is high, holding the captured value
// afterwards, as the latches at the port inputs of the published design.
// Implementation: a flip-flop on mclk that loads while CLKP is high, and a
// bypass multiplexer so that q follows d during the CLKP cycle itself:
//     q = clkp ? d : held
// This gives the latch's cycle behaviour without a level-sensitive storage
// element, which keeps the design a single-clock flip-flop design.
// The top uses it once per port for {w/rb, addr, w_data} and once, 4 bits
// wide, for the four port enables seen by the FSM.
module input_latch #(
  parameter int unsigned WIDTH = 42   // 1 (w/rb) + 9 (addr) + 32 (w_data)
) (
  input  logic             mclk,   // memory access clock
  input  logic             rst_n,  // asynchronous active-low reset
  input  logic             clkp,   // latch open (CLKP)
  input  logic [WIDTH-1:0] d,      // value at the port
  output logic [WIDTH-1:0] q       // latched value
);

  logic [WIDTH-1:0] held;

  always_ff @(posedge mclk or negedge rst_n) begin
    if (!rst_n)    held <= '0;
    else if (clkp) held <= d;
  end

  assign q = clkp ? d : held;

endmodule

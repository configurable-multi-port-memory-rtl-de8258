// Clock generator: the access-slot sequencer of the wrapper.
//
// For every port-clock period it issues N BACK strobes, one per memory
// access slot, and N-1 CLK2 strobes, on which the FSM moves to the next
// enabled port. N = B1B0 + 1 is the number of enabled ports.
//
// How it works. A 2-bit down counter Q1Q0 holds the number of CLK2 strobes
// still to come. While CLKP is high the counter is loaded with B1B0 and the
// sequencer starts; every following mclk cycle is one access slot and BACK is
// high in it. In a slot where Q1Q0 is not zero, CLK2 is also high and Q1Q0
// counts down at the end of the slot. The slot that finds Q1Q0 = 0 is the
// last one; after it the sequencer idles until the next CLKP.
//   4 ports: Q1Q0 = 11,10,01,00  BACK x4  CLK2 x3
//   1 port : Q1Q0 = 00           BACK x1  CLK2 x0
//
// Timing: slot 0 is the CLKP cycle itself (counter and run flag are loaded
// "asynchronously": the values used in the CLKP cycle bypass the registers),
// slot k is the k-th mclk cycle after it. The counter sequence, the load from
// B1B0 at CLKP and the pulse counts follow the published circuit. There the
// slot length T_self comes from a self-timed loop through a bitline replica;
// here a slot is one period of the mclk input, and BACK and CLK2 are strobes
// (clock enables) in the mclk domain rather than separate clocks. A CLKP that
// arrives before the sequence has finished restarts it.
module clk_gen (
  input  logic       mclk,   // memory access clock, one period = one slot
  input  logic       rst_n,  // asynchronous active-low reset
  input  logic       clkp,   // CLKP: start of a port-clock period
  input  logic [1:0] b,      // B1B0 = enabled ports - 1
  output logic       back,   // BACK: this cycle is an access slot
  output logic       clk2,   // CLK2: FSM advances at the end of this slot
  output logic [1:0] q       // Q1Q0: CLK2 strobes still to come
);

  logic [1:0] q_r;    // counter flip-flops
  logic       run_r;  // a sequence is in progress

  // Load bypass: in the CLKP cycle the counter reads B1B0 directly.
  assign q    = clkp ? b : q_r;
  assign back = clkp | run_r;
  assign clk2 = back & (q != 2'b00);

  always_ff @(posedge mclk or negedge rst_n) begin
    if (!rst_n) begin
      q_r   <= 2'b00;
      run_r <= 1'b0;
    end else if (back) begin
      q_r   <= clk2 ? q - 2'd1 : q;
      run_r <= clk2;
    end
  end

  // CLK2 only ever comes with BACK.
  a_clk2_in_slot: assert property (@(posedge mclk) disable iff (!rst_n) clk2 |-> back);

endmodule

// Pseudo-quad-port SRAM: a wrapper that makes one single-port SRAM macro
// serve four configurable ports.
//
// Each of the ports A, B, C, D has port_en, w_rb (1 = write, 0 = read), addr
// and w_data. Any subset of ports may be enabled in any port-clock (CLK)
// period, each as reader or writer. Inside the period the wrapper visits the
// enabled ports one after another in priority order A > B > C > D and gives
// each one access slot of one mclk cycle on the macro. With mclk at four times
// CLK (1 GHz against 250 MHz) all four ports are served every CLK period.
//
// Data path and control per CLK period:
//   clkp_gen         CLKP, high in the mclk cycle in which CLK rises
//   input_latch x5   capture every port's request (and the enables) at CLKP
//   port_counter     B1B0 = enabled ports - 1
//   priority_encoder first enabled port
//   clk_gen          N BACK strobes (slots) and N-1 CLK2 strobes
//   port_fsm         select lines: loaded from the priority encoder at CLKP,
//                    stepped to the next enabled port at each CLK2
//   port_mux         selected port -> sram_macro
//   decoder          BACK and read -> output register of the selected port
//   output_stage x4  output register, then output latch at the next CLKP
//
// Timing: requests are sampled in the CLKP cycle. Slot k (k = 0..N-1) is the
// k-th mclk cycle from the CLKP cycle. A write takes effect at the end of its
// slot, so a lower-priority port reading the same address in the same period
// sees the new data. Read data appear on r_data one mclk cycle after the next
// CLK rising edge and stay for one CLK period. CLK must be synchronous to mclk
// and its period must hold at least as many mclk cycles as ports enabled.
//
// The block structure, the priority order, the FSM transitions and the BACK
// and CLK2 pulse counts follow the published design. Replacing its self-timed
// clock generator loop by the mclk input, the port widths and the handling of
// cycles with no port enabled (no access) are this design's choices.
module mp_sram_wrapper
  import mpm_pkg::*;
#(
  parameter int unsigned ADDR_W = ADDR_W_DEF,
  parameter int unsigned DATA_W = DATA_W_DEF
) (
  input  logic                          mclk,     // memory access clock
  input  logic                          rst_n,    // asynchronous active-low reset
  input  logic                          ext_clk,  // port clock CLK, synchronous to mclk
  input  logic [NPORTS-1:0]             port_en,  // port enables, bit 0 = A
  input  logic [NPORTS-1:0]             w_rb,     // 1 = write, 0 = read
  input  logic [NPORTS-1:0][ADDR_W-1:0] addr,     // per-port address
  input  logic [NPORTS-1:0][DATA_W-1:0] w_data,   // per-port write data
  output logic [NPORTS-1:0][DATA_W-1:0] r_data,   // per-port read data
  output logic                          clkp,     // CLKP (observation)
  output logic                          back,     // BACK strobe (observation)
  output logic                          clk2      // CLK2 strobe (observation)
);

  localparam int unsigned REQ_W = 1 + ADDR_W + DATA_W;

  // ---------------------------------------------------------------- CLKP
  clkp_gen u_clkp (.mclk, .rst_n, .ext_clk, .clkp);

  // ------------------------------------------------------- input latches
  logic [NPORTS-1:0]             en_l;
  logic [NPORTS-1:0]             we_l;
  logic [NPORTS-1:0][ADDR_W-1:0] addr_l;
  logic [NPORTS-1:0][DATA_W-1:0] wdata_l;

  input_latch #(.WIDTH(NPORTS)) u_en_latch (
    .mclk, .rst_n, .clkp, .d(port_en), .q(en_l)
  );

  for (genvar p = 0; p < NPORTS; p++) begin : g_in
    input_latch #(.WIDTH(REQ_W)) u_latch (
      .mclk, .rst_n, .clkp,
      .d({w_rb[p], addr[p], w_data[p]}),
      .q({we_l[p], addr_l[p], wdata_l[p]})
    );
  end

  // ------------------------------------------- port count and priority
  logic [1:0] b;
  logic [2:0] n_en;
  port_sel_t  pe_sel;
  logic       pe_valid;

  port_counter     u_cnt (.port_en, .b, .n_en);
  priority_encoder u_pe  (.port_en, .sel(pe_sel), .valid(pe_valid));

  // ---------------------------------------------------- clock generator
  logic [1:0] q_cnt;
  clk_gen u_clk_gen (.mclk, .rst_n, .clkp, .b, .back, .clk2, .q(q_cnt));

  // ----------------------------------------------------------------- FSM
  port_sel_t sel;
  port_fsm u_fsm (.mclk, .rst_n, .clkp, .pe_sel, .clk2, .port_en(en_l), .sel);

  // --------------------------------------------------------- MUX -> SRAM
  logic              m_en, m_we;
  logic [ADDR_W-1:0] m_addr;
  logic [DATA_W-1:0] m_wdata, m_rdata;

  port_mux #(.ADDR_W(ADDR_W), .DATA_W(DATA_W)) u_mux (
    .sel, .en_in(en_l), .we_in(we_l), .addr_in(addr_l), .wdata_in(wdata_l),
    .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wdata)
  );

  logic ce;
  assign ce = back & m_en;

  sram_macro #(.ADDR_W(ADDR_W), .DATA_W(DATA_W)) u_sram (
    .mclk, .ce, .we(m_we), .addr(m_addr), .din(m_wdata), .dout(m_rdata)
  );

  // --------------------------------------------- decoder and output side
  logic [NPORTS-1:0] cap;
  decoder u_dec (.sel, .en(ce & ~m_we), .oh(cap));

  for (genvar p = 0; p < NPORTS; p++) begin : g_out
    output_stage #(.DATA_W(DATA_W)) u_out (
      .mclk, .rst_n, .cap(cap[p]), .clkp, .din(m_rdata), .r_data(r_data[p])
    );
  end

  // ---------------------------------------------------------- assertions
  // Exactly one output register captures per read slot, none otherwise.
  a_cap_onehot: assert property (@(posedge mclk) disable iff (!rst_n)
                                 $onehot0(cap) && ((cap != '0) == (ce && !m_we)));
  // The CLKP cycle is always an access slot.
  a_clkp_slot:  assert property (@(posedge mclk) disable iff (!rst_n) clkp |-> back);
  // Only enabled ports reach the macro.
  a_sel_en:     assert property (@(posedge mclk) disable iff (!rst_n) ce |-> en_l[sel]);

  // n_en and pe_valid are for observation in simulation only.
  logic unused_ok;
  assign unused_ok = ^{n_en, pe_valid, q_cnt};

endmodule

// Port multiplexer: connects the selected port to the SRAM macro.
//
// A 4:1 multiplexer, steered by the FSM select lines, on the latched port
// signals: port_en, w/rb, addr and w_data. Passing the selected port's enable
// along (so that a disabled port never reaches the macro) is this design's
// choice. Purely combinational.
module port_mux
  import mpm_pkg::*;
#(
  parameter int unsigned ADDR_W = ADDR_W_DEF,
  parameter int unsigned DATA_W = DATA_W_DEF
) (
  input  port_sel_t                      sel,       // FSM select lines
  input  logic [NPORTS-1:0]              en_in,     // latched port_en
  input  logic [NPORTS-1:0]              we_in,     // latched w/rb
  input  logic [NPORTS-1:0][ADDR_W-1:0]  addr_in,   // latched addresses
  input  logic [NPORTS-1:0][DATA_W-1:0]  wdata_in,  // latched write data
  output logic                           en,        // selected port enabled
  output logic                           we,        // selected w/rb
  output logic [ADDR_W-1:0]              addr,      // selected address
  output logic [DATA_W-1:0]              wdata      // selected write data
);

  always_comb begin
    en    = en_in[sel];
    we    = we_in[sel];
    addr  = addr_in[sel];
    wdata = wdata_in[sel];
  end

endmodule

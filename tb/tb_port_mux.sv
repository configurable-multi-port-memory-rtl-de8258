// Self-checking test of port_mux: random port requests; the outputs must be
// the fields of the selected port.
module tb_port_mux;
  import mpm_pkg::*;
  localparam int AW = 9, DW = 32;
  port_sel_t             sel;
  logic [3:0]            en_in, we_in;
  logic [3:0][AW-1:0]    addr_in;
  logic [3:0][DW-1:0]    wdata_in;
  logic                  en, we;
  logic [AW-1:0]         addr;
  logic [DW-1:0]         wdata;
  int checks = 0, failures = 0;

  port_mux #(.ADDR_W(AW), .DATA_W(DW)) dut (.sel, .en_in, .we_in, .addr_in, .wdata_in,
                                            .en, .we, .addr, .wdata);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      int s;
      s = i % 4;
      sel   = port_sel_t'(s);
      en_in = 4'($urandom);
      we_in = 4'($urandom);
      for (int p = 0; p < 4; p++) begin
        addr_in[p]  = AW'($urandom);
        wdata_in[p] = $urandom;
      end
      #1;
      checks++;
      if (en !== en_in[s] || we !== we_in[s] || addr !== addr_in[s] || wdata !== wdata_in[s]) begin
        failures++;
        $display("FAIL sel=%0d en=%b we=%b addr=%h wdata=%h", s, en, we, addr, wdata);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

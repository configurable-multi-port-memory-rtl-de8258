// Self-checking test of decoder: every select value with the enable low and
// high; exactly the selected bit may be set, and only when enabled.
module tb_decoder;
  import mpm_pkg::*;
  port_sel_t  sel;
  logic       en;
  logic [3:0] oh;
  int checks = 0, failures = 0;

  decoder dut (.sel, .en, .oh);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int s = 0; s < 4; s++) begin
        sel = port_sel_t'(s);
        en  = e[0];
        #1;
        checks++;
        if (oh !== (e[0] ? 4'(1 << s) : 4'b0000)) begin
          failures++;
          $display("FAIL sel=%0d en=%0d oh=%b", s, e, oh);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Self-checking test of priority_encoder: all 16 enable patterns against the
// fixed order A > B > C > D (bit 0 = A).
module tb_priority_encoder;
  import mpm_pkg::*;
  logic [3:0] port_en;
  port_sel_t  sel;
  logic       valid;
  int checks = 0, failures = 0;

  priority_encoder dut (.port_en, .sel, .valid);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      logic [1:0] exp_sel;
      port_en = 4'(v);
      if      (v[0]) exp_sel = 2'd0;
      else if (v[1]) exp_sel = 2'd1;
      else if (v[2]) exp_sel = 2'd2;
      else if (v[3]) exp_sel = 2'd3;
      else           exp_sel = 2'd0;
      #1;
      checks += 2;
      if (sel !== port_sel_t'(exp_sel)) begin failures++; $display("FAIL en=%b sel=%0d exp %0d", port_en, sel, exp_sel); end
      if (valid !== (v != 0))           begin failures++; $display("FAIL en=%b valid=%b", port_en, valid); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

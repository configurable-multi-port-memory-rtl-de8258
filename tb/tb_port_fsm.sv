// Self-checking test of port_fsm. Each period loads the FSM at CLKP with the
// first enabled port and then applies CLK2 in random cycles. A reference that
// walks the enable vector (next enabled port of lower priority, or stay)
// gives the expected select lines in every cycle. All 16 enable patterns are
// run with CLK2 in the first N-1 cycles, then random patterns and strobes.
module tb_port_fsm;
  import mpm_pkg::*;
  logic       mclk = 0, rst_n = 0, clkp = 0, clk2 = 0;
  logic [3:0] port_en = '0;
  port_sel_t  pe_sel = PORT_A, sel;
  int checks = 0, failures = 0;

  port_fsm dut (.mclk, .rst_n, .clkp, .pe_sel, .clk2, .port_en, .sel);

  always #5 mclk = ~mclk;

  initial begin
    repeat (20000) @(posedge mclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int first_en(logic [3:0] en);
    for (int i = 0; i < 4; i++) if (en[i]) return i;
    return 0;
  endfunction

  function automatic int next_en(logic [3:0] en, int cur);
    for (int i = cur + 1; i < 4; i++) if (en[i]) return i;
    return cur;
  endfunction

  // one period of r cycles; strobe_mode 0: CLK2 in cycles 0..N-2, 1: random
  task automatic period(logic [3:0] en, int r, int strobe_mode);
    int cur = 0, n;
    n = int'(en[0]) + int'(en[1]) + int'(en[2]) + int'(en[3]);
    for (int c = 0; c < r; c++) begin
      @(negedge mclk);
      clkp    = (c == 0);
      port_en = en;
      pe_sel  = port_sel_t'(first_en(en));
      clk2    = strobe_mode == 0 ? (c < n - 1) : ($urandom % 2 == 1);
      if (c == 0) cur = first_en(en);
      #1;
      checks++;
      if (sel !== port_sel_t'(cur)) begin
        failures++;
        $display("FAIL en=%b c=%0d sel=%0d exp %0d", en, c, sel, cur);
      end
      if (clk2) cur = next_en(en, cur);
    end
  endtask

  initial begin
    repeat (2) @(negedge mclk);
    rst_n = 1;
    for (int v = 0; v < 16; v++) period(4'(v), 5, 0);
    for (int i = 0; i < 500; i++) period(4'($urandom), 1 + ($urandom % 6), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Self-checking test of clkp_gen: drives a port clock that is 4, 3, 6 and
// 2 mclk cycles long, checks that CLKP is high exactly in the first mclk cycle
// of every CLK high phase and nowhere else, and counts pulses per CLK period.
module tb_clkp_gen;
  logic mclk = 0, rst_n = 0, ext_clk = 0, clkp;
  int checks = 0, failures = 0;

  clkp_gen dut (.mclk, .rst_n, .ext_clk, .clkp);

  always #5 mclk = ~mclk;

  initial begin
    repeat (2000) @(posedge mclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_period(int high, int low);
    for (int c = 0; c < high + low; c++) begin
      @(negedge mclk);
      ext_clk = (c < high);
      #1;
      checks++;
      if (clkp !== (c == 0)) begin
        failures++;
        $display("FAIL cycle %0d of period (high %0d): clkp=%b", c, high, clkp);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge mclk);
    rst_n = 1;
    for (int r = 0; r < 5; r++) begin
      run_period(2, 2);
      run_period(1, 2);
      run_period(3, 3);
      run_period(1, 1);
      run_period(1 + ($urandom % 4), 1 + ($urandom % 4));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

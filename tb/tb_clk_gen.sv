// Self-checking test of clk_gen. For every port count N (B1B0 = N-1) and for
// port-clock periods of R = 1..7 mclk cycles it drives CLKP in the first cycle
// of the period and checks, cycle by cycle, that BACK is high in the first N
// cycles, CLK2 in the first N-1 and Q1Q0 counts N-1 down to 0. When R < N the
// next CLKP restarts the sequence. Per complete period it also checks the
// pulse counts: N BACK and N-1 CLK2 (one access slot per mclk cycle).
module tb_clk_gen;
  logic       mclk = 0, rst_n = 0, clkp = 0, back, clk2;
  logic [1:0] b = 2'b00, q;
  int checks = 0, failures = 0;

  clk_gen dut (.mclk, .rst_n, .clkp, .b, .back, .clk2, .q);

  always #5 mclk = ~mclk;

  initial begin
    repeat (5000) @(posedge mclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic period(int n, int r);
    int nback = 0, nclk2 = 0;
    for (int c = 0; c < r; c++) begin
      @(negedge mclk);
      clkp = (c == 0);
      b    = 2'(n - 1);
      #1;
      checks += 3;
      if (back !== (c < n))     begin failures++; $display("FAIL N=%0d R=%0d c=%0d back=%b", n, r, c, back); end
      if (clk2 !== (c < n - 1)) begin failures++; $display("FAIL N=%0d R=%0d c=%0d clk2=%b", n, r, c, clk2); end
      if (c < n && q !== 2'(n - 1 - c)) begin failures++; $display("FAIL N=%0d c=%0d q=%0d", n, c, q); end
      nback += int'(back);
      nclk2 += int'(clk2);
    end
    if (r >= n) begin
      checks++;
      if (nback != n || nclk2 != n - 1) begin
        failures++;
        $display("FAIL N=%0d R=%0d: %0d BACK, %0d CLK2 in one period", n, r, nback, nclk2);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge mclk);
    rst_n = 1;
    // idle: no strobes without CLKP
    repeat (3) begin
      @(negedge mclk);
      #1;
      checks++;
      if (back || clk2) begin failures++; $display("FAIL strobe while idle"); end
    end
    for (int n = 4; n >= 1; n--)          // the 4,3,2,1-port sequence
      period(n, 4);
    for (int n = 1; n <= 4; n++)
      for (int r = 1; r <= 7; r++)
        period(n, r);
    for (int i = 0; i < 100; i++)
      period(1 + ($urandom % 4), 1 + ($urandom % 7));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

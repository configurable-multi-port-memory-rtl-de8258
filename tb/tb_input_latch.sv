// Self-checking test of input_latch: q follows d while CLKP is high and
// holds the last value seen during CLKP otherwise, for random data.
module tb_input_latch;
  localparam int W = 42;
  logic mclk = 0, rst_n = 0, clkp = 0;
  logic [W-1:0] d = '0, q, held;
  int checks = 0, failures = 0;

  input_latch #(.WIDTH(W)) dut (.mclk, .rst_n, .clkp, .d, .q);

  always #5 mclk = ~mclk;

  initial begin
    repeat (5000) @(posedge mclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    held = '0;
    repeat (2) @(negedge mclk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge mclk);
      clkp = ($urandom % 4) == 0;
      d    = {$urandom, $urandom};
      #1;
      checks++;
      if (q !== (clkp ? d : held)) begin
        failures++;
        $display("FAIL i=%0d clkp=%b d=%h q=%h held=%h", i, clkp, d, q, held);
      end
      if (clkp) held = d;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

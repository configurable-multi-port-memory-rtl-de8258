// Self-checking test of output_stage: random capture strobes, CLKP strobes
// and data; a two-rank reference (register loaded on cap, port value loaded
// from the register on CLKP) gives r_data after every mclk edge.
module tb_output_stage;
  localparam int DW = 32;
  logic          mclk = 0, rst_n = 0, cap = 0, clkp = 0;
  logic [DW-1:0] din = '0, r_data, ref_reg, ref_out;
  int checks = 0, failures = 0;

  output_stage #(.DATA_W(DW)) dut (.mclk, .rst_n, .cap, .clkp, .din, .r_data);

  always #5 mclk = ~mclk;

  initial begin
    repeat (5000) @(posedge mclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_reg = '0; ref_out = '0;
    repeat (2) @(negedge mclk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge mclk);
      checks++;
      if (r_data !== ref_out) begin
        failures++;
        $display("FAIL i=%0d r_data=%h exp %h", i, r_data, ref_out);
      end
      cap  = ($urandom % 3) == 0;
      clkp = ($urandom % 4) == 0;
      din  = $urandom;
      if (clkp) ref_out = ref_reg;
      if (cap)  ref_reg = din;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

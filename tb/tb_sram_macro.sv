// Self-checking test of sram_macro: random writes and reads over the whole
// 512-word array against a reference array; a word is only checked once it
// has been written. Also checks that ce = 0 or we = 0 never writes.
module tb_sram_macro;
  localparam int AW = 9, DW = 32, DEPTH = 512;
  logic          mclk = 0, ce = 0, we = 0;
  logic [AW-1:0] addr = '0;
  logic [DW-1:0] din = '0, dout;
  logic [DW-1:0] ref_mem [DEPTH];
  bit            written [DEPTH];
  int checks = 0, failures = 0;

  sram_macro #(.ADDR_W(AW), .DATA_W(DW)) dut (.mclk, .ce, .we, .addr, .din, .dout);

  always #5 mclk = ~mclk;

  initial begin
    repeat (20000) @(posedge mclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word once
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge mclk);
      ce = 1; we = 1; addr = AW'(a); din = $urandom;
      ref_mem[a] = din; written[a] = 1;
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge mclk);
      addr = AW'($urandom);
      din  = $urandom;
      case ($urandom % 4)
        0: begin ce = 1; we = 1; end
        1: begin ce = 0; we = 1; end   // disabled write: must not store
        default: begin ce = ($urandom % 2 == 1); we = 0; end
      endcase
      #1;
      checks++;
      if (dout !== ref_mem[addr]) begin
        failures++;
        $display("FAIL i=%0d addr=%0d dout=%h exp %h", i, addr, dout, ref_mem[addr]);
      end
      if (ce && we) ref_mem[addr] = din;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

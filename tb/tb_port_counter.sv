// Self-checking test of port_counter: all 16 enable patterns; the count is
// recomputed bit by bit and B1B0 checked against the 00=1 .. 11=4 code.
module tb_port_counter;
  logic [3:0] port_en;
  logic [1:0] b;
  logic [2:0] n_en;
  int checks = 0, failures = 0;

  port_counter dut (.port_en, .b, .n_en);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      int n;
      logic [1:0] exp_b;
      port_en = 4'(v);
      n = int'(v[0]) + int'(v[1]) + int'(v[2]) + int'(v[3]);
      case (n)
        2: exp_b = 2'b01;
        3: exp_b = 2'b10;
        4: exp_b = 2'b11;
        default: exp_b = 2'b00;
      endcase
      #1;
      checks += 2;
      if (n_en !== 3'(n)) begin failures++; $display("FAIL en=%b n_en=%0d", port_en, n_en); end
      if (b !== exp_b)    begin failures++; $display("FAIL en=%b b=%b exp %b", port_en, b, exp_b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

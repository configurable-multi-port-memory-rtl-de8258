// End-to-end test of mp_sram_wrapper at its default size (four ports,
// 512 x 32 SRAM), with mclk at four times the port clock CLK as in the
// 250 MHz / 1 GHz operating point.
//
// Every CLK period each port gets a random enable, direction, address and
// data. A reference memory applies the period's requests in priority order
// A, B, C, D; a port's read result must show on r_data during the next
// period (checked one and three mclk cycles after CLK rises, and checked not
// to be there yet in the cycle in which CLK rises), and a port that does not
// read keeps its last result. Every period also checks the cycle
// budget: exactly N BACK strobes and N-1 CLK2 strobes in the period's four
// mclk cycles, N being the number of enabled ports.
//
// Phases: fill all 512 words with four-port writes; the 4-, 3-, 2-, 1-port
// sequence; every read/write mix of four ports (4W, 1R3W, 2R2W, 3R1W, 4R);
// then random periods, half of them on a 16-word address pool so that
// same-address write-then-read inside one period happens often.
// Mechanisms counted (each must occur): 1/2/3/4-port periods, each read/write
// mix, no port enabled, a period not starting at port A, in-period
// read-after-write to the same address.
module tb_mp_sram_wrapper;
  import mpm_pkg::*;
  localparam int AW = ADDR_W_DEF, DW = DATA_W_DEF, DEPTH = 2 ** AW;
  localparam int R = 4;  // mclk cycles per CLK period

  logic                  mclk = 0, rst_n = 0, ext_clk = 0;
  logic [3:0]            port_en = '0, w_rb = '0;
  logic [3:0][AW-1:0]    addr = '0;
  logic [3:0][DW-1:0]    w_data = '0;
  logic [3:0][DW-1:0]    r_data;
  logic                  clkp, back, clk2;

  mp_sram_wrapper dut (.mclk, .rst_n, .ext_clk, .port_en, .w_rb, .addr, .w_data,
                       .r_data, .clkp, .back, .clk2);

  always #5 mclk = ~mclk;

  int checks = 0, failures = 0;
  logic [DW-1:0] ref_mem [DEPTH];
  logic [DW-1:0] visible [4];   // what r_data must show from cycle 1 of this period
  logic [DW-1:0] shown [4];     // what r_data still shows in cycle 0 (one period older)
  int n_ports_seen [5];         // periods with 0..4 ports enabled
  int mix_seen [5];             // four-port periods with 0..4 readers
  int n_raw = 0, n_not_a = 0, n_periods = 0;

  initial begin
    repeat (200000) @(posedge mclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One CLK period with the given requests.
  task automatic period(logic [3:0] en, logic [3:0] wr, logic [3:0][AW-1:0] a,
                        logic [3:0][DW-1:0] wd);
    int n = 0, nr = 0, nback = 0, nclk2 = 0;
    logic [DW-1:0] result [4];
    logic [3:0]    did_read = '0;
    bit            wrote [DEPTH];
    for (int p = 0; p < 4; p++) begin
      if (!en[p]) continue;
      n++;
      if (wr[p]) begin
        ref_mem[a[p]] = wd[p];
        wrote[a[p]]   = 1;
      end else begin
        nr++;
        result[p]   = ref_mem[a[p]];
        did_read[p] = 1;
        if (wrote[a[p]]) n_raw++;
      end
    end
    n_ports_seen[n]++;
    if (n == 4) mix_seen[nr]++;
    if (en != 0 && !en[0]) n_not_a++;
    n_periods++;

    for (int c = 0; c < R; c++) begin
      @(negedge mclk);
      ext_clk = (c < R / 2);
      if (c == 0) begin
        port_en = en; w_rb = wr; addr = a; w_data = wd;
      end
      #1;
      nback += int'(back);
      nclk2 += int'(clk2);
      if (c == 0) begin
        for (int p = 0; p < 4; p++) begin
          checks++;
          if (r_data[p] !== shown[p]) begin
            failures++;
            $display("FAIL period %0d cycle 0 port %0d: r_data=%h exp %h (result too early)",
                     n_periods, p, r_data[p], shown[p]);
          end
        end
      end
      if (c == 1 || c == 3) begin
        for (int p = 0; p < 4; p++) begin
          checks++;
          if (r_data[p] !== visible[p]) begin
            failures++;
            $display("FAIL period %0d cycle %0d port %0d: r_data=%h exp %h",
                     n_periods, c, p, r_data[p], visible[p]);
          end
        end
      end
    end
    checks++;
    if (nback != (n == 0 ? 1 : n) || nclk2 != (n == 0 ? 0 : n - 1)) begin
      failures++;
      $display("FAIL period %0d: %0d ports, %0d BACK, %0d CLK2 in %0d mclk cycles",
               n_periods, n, nback, nclk2, R);
    end
    for (int p = 0; p < 4; p++) shown[p] = visible[p];
    for (int p = 0; p < 4; p++) if (did_read[p]) visible[p] = result[p];
  endtask

  task automatic random_period(bit pool);
    logic [3:0][AW-1:0] a;
    logic [3:0][DW-1:0] wd;
    for (int p = 0; p < 4; p++) begin
      a[p]  = pool ? AW'($urandom % 16) : AW'($urandom);
      wd[p] = $urandom;
    end
    period(4'($urandom), 4'($urandom), a, wd);
  endtask

  initial begin
    logic [3:0][AW-1:0] a;
    logic [3:0][DW-1:0] wd;
    for (int p = 0; p < 4; p++) begin visible[p] = '0; shown[p] = '0; end
    repeat (3) @(negedge mclk);
    rst_n = 1;

    // fill the array, four words per period
    for (int w = 0; w < DEPTH; w += 4) begin
      for (int p = 0; p < 4; p++) begin a[p] = AW'(w + p); wd[p] = $urandom; end
      period(4'b1111, 4'b1111, a, wd);
    end
    // 4-, 3-, 2-, 1-port periods, all reads of the words just written
    for (int p = 0; p < 4; p++) a[p] = AW'(p * 7);
    period(4'b1111, 4'b0000, a, wd);
    period(4'b0111, 4'b0000, a, wd);
    period(4'b0011, 4'b0000, a, wd);
    period(4'b0001, 4'b0000, a, wd);
    // every read/write mix on four ports, several times
    for (int i = 0; i < 64; i++) begin
      for (int p = 0; p < 4; p++) begin a[p] = AW'($urandom % 8); wd[p] = $urandom; end
      period(4'b1111, 4'(i % 16), a, wd);
    end
    // nothing enabled, then a period starting at port C
    period(4'b0000, 4'b0000, a, wd);
    period(4'b1100, 4'b0100, a, wd);
    // random traffic
    for (int i = 0; i < 4000; i++) random_period(i % 2 == 0);
    // one idle period so the last results are visible and checked
    period(4'b0000, 4'b0000, a, wd);

    for (int n = 0; n <= 4; n++) begin
      checks++;
      if (n_ports_seen[n] == 0) begin failures++; $display("FAIL never ran a %0d-port period", n); end
      checks++;
      if (mix_seen[n] == 0) begin failures++; $display("FAIL never ran a %0dR%0dW period", n, 4 - n); end
    end
    checks += 2;
    if (n_raw == 0)   begin failures++; $display("FAIL no in-period read-after-write"); end
    if (n_not_a == 0) begin failures++; $display("FAIL no period without port A"); end
    $display("periods %0d: 0-port %0d, 1-port %0d, 2-port %0d, 3-port %0d, 4-port %0d",
             n_periods, n_ports_seen[0], n_ports_seen[1], n_ports_seen[2], n_ports_seen[3], n_ports_seen[4]);
    $display("four-port mixes: 4W %0d, 1R3W %0d, 2R2W %0d, 3R1W %0d, 4R %0d",
             mix_seen[0], mix_seen[1], mix_seen[2], mix_seen[3], mix_seen[4]);
    $display("in-period read-after-write %0d, periods not starting at A %0d", n_raw, n_not_a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

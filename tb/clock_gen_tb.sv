// clock_gen_tb: end-to-end test of the clock system.
// Checks, with the internal clocks: 25 ns period of the H-tree 40 MHz clock,
// two strobe pulses per period at 18.75 ns and 21.875 ns after its rising
// edge; a phase code of 40 moves the H-tree clock by 40 x 97.65625 ps; with
// MUX2 switched (test_clk1) the strobe line carries the plain 320 MHz clock
// (8 rising edges per period); with MUX1 switched (test_clk0) the chip runs
// from the off-chip 40/320 MHz pair, which the tests offset by 5 ns.
module clock_gen_tb;
  timeunit 1ps; timeprecision 1fs;
  logic clk1280 = 1'b0, rst_n = 1'b1, ext40 = 1'b0, ext320 = 1'b0;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act
  logic tc0 = 1'b0, tc1 = 1'b0;
  logic [7:0] phase = '0;
  logic tree_clk40, tree_strobe, clk320;
  int checks = 0, failures = 0;

  clock_gen dut (.clk1280(clk1280), .rst_n(rst_n), .ext_clk40(ext40), .ext_clk320(ext320),
                 .test_clk0(tc0), .test_clk1(tc1), .phase_sel(phase),
                 .tree_clk40(tree_clk40), .tree_strobe(tree_strobe), .clk320(clk320));

  always #390.625 clk1280 = ~clk1280;
  // off-chip pair: 40 MHz rising at 5 ns + k*25 ns, 320 MHz rising 781.25 ps later
  initial begin
    #5000;
    forever begin
      ext40 = 1'b1;
      fork
        begin #12500 ext40 = 1'b0; end
        begin #781.25; repeat (8) begin ext320 = 1'b1; #1562.5 ext320 = 1'b0; #1562.5; end end
      join_any
      #12500;
    end
  end

  task automatic near(input string what, input real got, input real exp);
    checks++;
    if (got < exp - 0.5 || got > exp + 0.5) begin
      failures++;
      $display("FAIL %s: got %0.3f expected %0.3f", what, got, exp);
    end
  endtask

  realtime rises[$];
  always @(posedge tree_strobe) rises.push_back($realtime);

  // measure one period of the H-tree clock; returns the start time
  task automatic period(output realtime tc, output int nstrobe, output realtime s0, output realtime s1);
    realtime tn;
    @(posedge tree_clk40); tc = $realtime;
    rises.delete();
    @(posedge tree_clk40); tn = $realtime;
    near("H-tree clock period", tn - tc, 25000.0);
    nstrobe = rises.size();
    s0 = (nstrobe > 0) ? rises[0] - tc : -1.0;
    s1 = (nstrobe > 1) ? rises[1] - tc : -1.0;
  endtask

  initial begin
    #20_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    realtime tc, s0, s1, t_ref;
    int n;
    #3000 rst_n = 1'b1;
    repeat (4) @(posedge tree_clk40);
    for (int i = 0; i < 5; i++) begin
      period(tc, n, s0, s1);
      checks++; if (n != 2) begin failures++; $display("FAIL %0d strobe pulses", n); end
      near("first strobe", s0, 18750.0);
      near("second strobe", s1, 21875.0);
    end
    t_ref = tc - 25000.0 * $floor(tc / 25000.0);
    phase = 8'd40;
    repeat (4) @(posedge tree_clk40);
    period(tc, n, s0, s1);
    begin
      real sh;
      sh = (tc - 25000.0 * $floor(tc / 25000.0)) - t_ref;
      if (sh < 0) sh += 25000.0;
      near("phase shift of 40 steps", sh, 40 * 97.65625);
    end
    checks++; if (n != 2) begin failures++; $display("FAIL %0d strobe pulses after shift", n); end
    // MUX2: raw 320 MHz on the strobe line
    tc1 = 1'b1;
    repeat (3) @(posedge tree_clk40);
    period(tc, n, s0, s1);
    checks++; if (n != 8) begin failures++; $display("FAIL %0d edges with test_clk1", n); end
    near("320 MHz spacing", s1 - s0, 3125.0);
    // MUX1: off-chip clocks
    tc1 = 1'b0; tc0 = 1'b1;
    repeat (4) @(posedge tree_clk40);
    period(tc, n, s0, s1);
    checks++; if (n != 2) begin failures++; $display("FAIL %0d strobe pulses on external clocks", n); end
    near("strobe spacing on external clocks", s1 - s0, 3125.0);
    // H-tree clock follows the external 40 MHz: edge at 5 ns + 781.25 ps (mod 25 ns)
    near("external clock phase", tc - 25000.0 * $floor(tc / 25000.0), 5781.25);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// clock_divider_tb: checks that the 40 MHz output has a period of exactly 32
// input cycles, 16 of them high, for 40 periods after reset, and that the
// phase output wraps to 0 at the 40 MHz rising edge.
module clock_divider_tb;
  timeunit 1ps; timeprecision 1fs;
  logic clk1280 = 1'b0, rst_n = 1'b1, clk40;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act
  logic [4:0] phase;
  int checks = 0, failures = 0;
  clock_divider #(.DIV(32)) dut (.clk1280(clk1280), .rst_n(rst_n), .clk40(clk40), .phase(phase));
  always #390.625 clk1280 = ~clk1280;

  int nbit = 0, nhigh = 0;
  always @(posedge clk1280) begin
    nbit <= nbit + 1;
    if (clk40) nhigh <= nhigh + 1;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    #10_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    int b0, h0;
    #2000 rst_n = 1'b1;
    @(posedge clk40);
    #1;
    for (int p = 0; p < 40; p++) begin
      b0 = nbit; h0 = nhigh;
      check("phase at rising edge", int'(phase), 0);
      @(posedge clk40);
      #1;
      check("bit clocks per period", nbit - b0, 32);
      check("bit clocks high per period", nhigh - h0, 16);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// strobe_gen_tb: drives 40 MHz and 320 MHz clocks with the relation the
// phase shifter gives (320 MHz rising one 1.28 GHz period after 40 MHz) and
// checks, for 20 periods: exactly two strobe pulses per 25 ns, 3125 ps apart,
// each 1562.5 ps wide, the first one 18.75 ns after the rising edge of
// clk40_out, and clk40_out with a 25 ns period.
module strobe_gen_tb;
  timeunit 1ps; timeprecision 1fs;
  logic clk1280 = 1'b0, clk40 = 1'b0, clk320 = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act
  logic strobe, clk40_out;
  int checks = 0, failures = 0;
  strobe_gen dut (.clk320(clk320), .clk40(clk40), .rst_n(rst_n), .strobe(strobe), .clk40_out(clk40_out));
  always #390.625 clk1280 = ~clk1280;
  int cnt = 0;
  always @(posedge clk1280) begin
    cnt <= (cnt + 1) % 32;
    clk40 <= ((cnt + 1) % 32) < 16;
    clk320 <= (((cnt + 1) % 4) == 1) || (((cnt + 1) % 4) == 2);
  end

  task automatic near(input string what, input real got, input real exp);
    checks++;
    if (got < exp - 0.5 || got > exp + 0.5) begin
      failures++;
      $display("FAIL %s: got %0.3f expected %0.3f", what, got, exp);
    end
  endtask

  realtime rises[$], falls[$];
  always @(posedge strobe) rises.push_back($realtime);
  always @(negedge strobe) falls.push_back($realtime);

  initial begin
    #5_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    realtime tc, tn;
    #10000 rst_n = 1'b1;
    repeat (3) @(posedge clk40_out);
    for (int p = 0; p < 20; p++) begin
      @(posedge clk40_out); tc = $realtime;
      rises.delete(); falls.delete();
      @(posedge clk40_out); tn = $realtime;
      near("clk40_out period", tn - tc, 25000.0);
      checks++;
      if (rises.size() != 2 || falls.size() != 2) begin
        failures++;
        $display("FAIL %0d rising / %0d falling strobe edges in a period", rises.size(), falls.size());
      end else begin
        near("first strobe position", rises[0] - tc, 18750.0);
        near("strobe spacing", rises[1] - rises[0], 3125.0);
        near("strobe width", falls[0] - rises[0], 1562.5);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

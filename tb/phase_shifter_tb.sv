// phase_shifter_tb: for a set of phase codes, measures the delay from the
// 40 MHz input edge to the shifted 40 MHz output edge (expected code x
// 97.65625 ps), the 320 MHz period (3125 ps) and the 320 MHz edge position
// relative to the shifted 40 MHz edge (one 1.28 GHz period later).
module phase_shifter_tb;
  timeunit 1ps; timeprecision 1fs;
  logic clk1280 = 1'b0, clk40_in = 1'b0, clk40, clk320;
  logic [7:0] sel = '0;
  int checks = 0, failures = 0;
  phase_shifter dut (.clk1280(clk1280), .clk40_in(clk40_in), .phase_sel(sel), .clk40(clk40), .clk320(clk320));
  always #390.625 clk1280 = ~clk1280;
  int cnt = 0;
  always @(posedge clk1280) begin
    cnt <= (cnt + 1) % 32;
    clk40_in <= ((cnt + 1) % 32) >= 16;   // rises when cnt wraps to 16
  end

  task automatic near(input string what, input real got, input real exp);
    checks++;
    if (got < exp - 0.5 || got > exp + 0.5) begin
      failures++;
      $display("FAIL %s: got %0.3f expected %0.3f", what, got, exp);
    end
  endtask

  initial begin
    #50_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    realtime tin, tout, t1, t2;
    automatic int codes[6] = '{1, 7, 8, 100, 200, 255};
    foreach (codes[i]) begin
      sel = 8'(codes[i]);
      repeat (3) @(posedge clk40_in);
      @(posedge clk40_in); tin = $realtime;
      @(posedge clk40);    tout = $realtime;
      near($sformatf("40 MHz delay code %0d", codes[i]), tout - tin, codes[i] * 97.65625);
      @(posedge clk320); t1 = $realtime;
      @(posedge clk320); t2 = $realtime;
      near("320 MHz period", t2 - t1, 3125.0);
      near("320 MHz edge after 40 MHz edge", t1 - tout, 781.25);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tdc_delay_line_tb: self-checking test of the 63-cell cyclic delay line.
//
// With START low every tap sits at its resting level (odd cells high, even
// cells low). START is raised at random times for random lengths. While it
// is high the ring must oscillate: each tap toggles once per 63 cell
// delays, so its period is 126 x 17.8 ps = 2242.8 ps. Tap i must follow tap
// 0 by i cell delays. After START falls the line must return to the resting
// pattern within one pass (63 cells).
module tdc_delay_line_tb;
  timeunit 1ps; timeprecision 1fs;
  import etroc1_pkg::*;

  localparam real TD = 17.8;
  localparam int N = 63;

  logic start = 1'b0;
  logic [N-1:0] taps;
  int checks = 0, failures = 0;

  tdc_delay_line dut (.start(start), .taps(taps));

  task automatic check_r(input string what, input real got, input real exp, input real tol);
    checks++;
    if (got < exp - tol || got > exp + tol) begin
      failures++;
      $display("FAIL %s: got %0.3f expected %0.3f", what, got, exp);
    end
  endtask

  // Rising edges on taps 0 and 40
  realtime r0[$], r40[$];
  always @(posedge taps[0])  r0.push_back($realtime);
  always @(posedge taps[40]) r40.push_back($realtime);

  initial begin
    #10_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #5000;
    checks++;
    if (taps !== RING_REST) begin failures++; $display("FAIL resting pattern %h", taps); end
    for (int n = 0; n < 20; n++) begin
      real len;
      len = 3000.0 + real'($urandom_range(0, 15000));
      r0.delete(); r40.delete();
      #($urandom_range(100, 900));
      start = 1'b1;
      #(len);
      start = 1'b0;
      // period of tap 0
      for (int i = 1; i < r0.size(); i++)
        check_r("tap 0 period", r0[i] - r0[i-1], 126.0 * TD, 0.01);
      // tap 40 follows tap 0 by 40 cells (modulo the ring period)
      if (r0.size() > 0 && r40.size() > 0) begin
        real d;
        d = r40[0] - r0[0];
        if (d < 0) d += 126.0 * TD;
        check_r("tap 40 delay", d, 40.0 * TD, 0.01);
      end
      check_r("laps", real'(r0.size()), $floor((len - TD) / (126.0 * TD)) + 1.0, 1.0);
      #(N * TD + 100.0);
      checks++;
      if (taps !== RING_REST) begin failures++; $display("FAIL not back at rest %h", taps); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

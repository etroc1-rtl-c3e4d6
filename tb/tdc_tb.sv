// tdc_tb: self-checking test of the pixel TDC.
//
// Drives a 40 MHz clock and the reference strobe (two 320 MHz pulses at
// 18.75 ns and 21.875 ns into each 25 ns period), then places hits with
// random leading edge and width. Expected codes are computed from the
// programmed times and the 17.8 ps cell delay: TOA = (strobe - hit)/17.8 ps,
// TOT = width/35.6 ps, Cal = 3125/17.8 = 175.6. A tolerance of one bin covers
// the rounding of the ring phase. Widths whose trailing edge lands within a
// cell of the D31 transition (phase 30..33) are avoided: there the even-tap
// TOT recorder cannot tell whether the lap counter has stepped.
// Also checks: no hit gives a zero word, a hit after the strobes is not
// flagged, a trailing edge after the period end gives TOT = 511, and the
// result appears at the first clk40 edge after the hit (one-period latency).
module tdc_tb;
  timeunit 1ps; timeprecision 1fs;
  import etroc1_pkg::*;

  localparam real TD = 17.8;
  localparam real T40 = 25000.0;
  localparam real TS1 = 18750.0;

  logic clk40 = 1'b0, rst_n = 1'b1, hit = 1'b0, strobe = 1'b0;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act
  tdc_data_t data;
  int checks = 0, failures = 0;

  tdc dut (.clk40(clk40), .rst_n(rst_n), .hit(hit), .strobe(strobe), .data(data));

  real t0;  // start of the current period
  initial forever begin
    t0 = $realtime;
    clk40 = 1'b1;
    fork
      begin #(T40/2) clk40 = 1'b0; end
      begin #(TS1) strobe = 1'b1; #1562.5 strobe = 1'b0; #1562.5 strobe = 1'b1; #1562.5 strobe = 1'b0; end
    join
    #(T40 - TS1 - 3*1562.5);
  end

  task automatic check(input string what, input int got, input int exp, input int tol);
    checks++;
    if (got < exp - tol || got > exp + tol) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (+-%0d)", what, got, exp, tol);
    end
  endtask

  // Place a hit at offset th (ps) into the next period with width w (ps),
  // then read the word after the following clk40 edge.
  task automatic one_hit(input real th, input real w, output tdc_data_t d);
    @(posedge clk40);
    #(th);
    hit = 1'b1;
    #(w);
    hit = 1'b0;
    @(posedge clk40);
    #100;
    d = data;
  endtask

  initial begin
    #(400 * T40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  initial begin
    tdc_data_t d;
    automatic int ntest = 0;
    repeat (3) @(posedge clk40);
    rst_n = 1'b1;
    repeat (2) @(posedge clk40);
    #100;
    check("no hit -> zero word", int'(data), 0, 0);
    for (int i = 0; i < 200; i++) begin
      automatic real th, w, c;
      automatic int ph;
      th = 7500.0 + real'($urandom_range(0, 11000));   // TOA 0.25 .. 11.25 ns
      w  = 800.0 + real'($urandom_range(0, 5500));     // TOT 0.8 .. 6.3 ns
      if (th + w > T40 - 500.0) w = T40 - 500.0 - th;
      c  = w / TD;
      ph = int'($floor(c)) % 126;
      if (ph >= 29 && ph <= 34) continue;
      ntest++;
      one_hit(th, w, d);
      check("hit flag", int'(d.hit), 1, 0);
      check("TOA", int'(d.toa), int'($floor((TS1 - th) / TD)), 1);
      check("Cal", int'(d.cal), 176, 1);
      check("TOT", int'(d.tot), int'($floor(w / (2.0 * TD))), 1);
    end
    check("enough random hits", int'(ntest > 150), 1, 0);
    // hit after the second strobe: ring misses the strobe, not flagged
    one_hit(23000.0, 1000.0, d);
    check("late hit not flagged", int'(d.hit), 0, 0);
    // trailing edge after the period end: TOT saturates
    @(posedge clk40);
    #(10000.0);
    hit = 1'b1;
    #(17000.0);
    hit = 1'b0;
    #100;
    check("long pulse flagged", int'(data.hit), 1, 0);
    check("long pulse TOT saturated", int'(data.tot), 511, 0);
    check("long pulse TOA", int'(data.toa), int'($floor((TS1 - 10000.0) / TD)), 1);
    // latency: word is zero before the edge, valid right after it
    @(posedge clk40);
    #(9000.0);
    hit = 1'b1; #2000.0; hit = 1'b0;
    @(negedge clk40);
    check("no result before period end", int'(data.hit), 0, 0);
    @(posedge clk40); #10;
    check("result one period after hit", int'(data.hit), 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

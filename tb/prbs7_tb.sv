// prbs7_tb: collects 40 words (1280 bits, MSB first) and checks that every
// bit equals the XOR of the bits 7 and 6 places earlier (x^7 + x^6 + 1),
// that the sequence repeats after 127 bits and not after a shorter period
// dividing 127 (127 is prime, so only period 1 = all zeros/ones is excluded),
// and that en low holds the word.
module prbs7_tb;
  timeunit 1ps; timeprecision 1fs;
  logic clk = 1'b0, rst_n = 1'b1, en = 1'b0;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act
  logic [31:0] dout;
  int checks = 0, failures = 0;
  prbs7 dut (.clk(clk), .rst_n(rst_n), .en(en), .dout(dout));
  always #12500 clk = ~clk;

  initial begin
    #100_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    bit bits[$];
    automatic int ones = 0;
    logic [31:0] held;
    #30000 rst_n = 1'b1;
    @(negedge clk) en = 1'b1;
    repeat (40) begin
      @(negedge clk);
      for (int i = 31; i >= 0; i--) bits.push_back(dout[i]);
    end
    for (int n = 7; n < bits.size(); n++) begin
      checks++;
      if (bits[n] != (bits[n-7] ^ bits[n-6])) begin failures++; $display("FAIL recurrence at bit %0d", n); end
    end
    for (int n = 0; n < 127; n++) ones += bits[n];
    checks++;
    if (ones != 64) begin failures++; $display("FAIL %0d ones in a period, expected 64", ones); end
    for (int n = 0; n + 127 < bits.size(); n++) begin
      checks++;
      if (bits[n] != bits[n+127]) begin failures++; $display("FAIL period at %0d", n); end
    end
    en = 1'b0;
    held = dout;
    repeat (3) @(negedge clk);
    checks++;
    if (dout != held) begin failures++; $display("FAIL word changed with en low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// scrambler_tb: feeds 300 random words, descrambles the output with a
// bit-serial x^58 + x^39 + 1 descrambler written here, and checks that the
// words come back once the descrambler has seen 58 bits (from the third word
// on). Also checks that the output differs from the input (the scrambler is
// not a pass-through) and that holding en low freezes the state.
module scrambler_tb;
  timeunit 1ps; timeprecision 1fs;
  logic clk = 1'b0, rst_n = 1'b1, en = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act
  logic [29:0] din, dout;
  int checks = 0, failures = 0;
  scrambler #(.W(30)) dut (.clk(clk), .rst_n(rst_n), .en(en), .din(din), .dout(dout));
  always #12500 clk = ~clk;

  logic [57:0] rx = '0;   // received bits, rx[0] most recent
  function automatic logic [29:0] descramble(input logic [29:0] w);
    logic [29:0] d;
    for (int i = 29; i >= 0; i--) begin
      d[i] = w[i] ^ rx[38] ^ rx[57];
      rx = {rx[56:0], w[i]};
    end
    return d;
  endfunction

  initial begin
    #100_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    automatic int same = 0;
    logic [29:0] d, o1, o2;
    din = '0;
    #30000 rst_n = 1'b1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      din = 30'($urandom);
      #1;
      if (dout == din) same++;
      d = descramble(dout);
      if (k >= 2) begin
        checks++;
        if (d != din) begin failures++; $display("FAIL word %0d: %h -> %h", k, din, d); end
      end
    end
    checks++;
    if (same > 3) begin failures++; $display("FAIL %0d words passed unscrambled", same); end
    // en low: state holds, same input gives same output on the next clock
    @(negedge clk); en = 1'b0; din = 30'h1234567; #1 o1 = dout;
    @(negedge clk); #1 o2 = dout;
    checks++;
    if (o1 != o2) begin failures++; $display("FAIL state moved with en low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

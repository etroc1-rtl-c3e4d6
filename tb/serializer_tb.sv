// serializer_tb: runs a 1.28 GHz bit clock and a 40 MHz word clock derived
// from it, presents a new random word after each word-clock edge and
// deserializes sout using the frame marker. Checks that each word comes back
// intact (MSB first), that the frame marker comes exactly every 32 bit clocks
// (1.28 Gbps for 32-bit words at 40 MHz) and that the word appears one bit
// clock after the word-clock edge.
module serializer_tb;
  timeunit 1ps; timeprecision 1fs;
  logic clk1280 = 1'b0, clk40 = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act
  logic [31:0] word = '0;
  logic sout, frame;
  int checks = 0, failures = 0;
  serializer dut (.clk1280(clk1280), .rst_n(rst_n), .clk40(clk40), .word(word), .sout(sout), .frame(frame));
  always #390.625 clk1280 = ~clk1280;
  int cnt = 0;
  always @(posedge clk1280) begin
    cnt <= (cnt + 1) % 32;
    clk40 <= ((cnt + 1) % 32) < 16;
  end

  logic [31:0] last_word;
  always @(posedge clk40) if (rst_n) begin
    automatic logic [31:0] w = $urandom;
    word <= w;
    last_word <= w;
  end

  initial begin
    #100_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    logic [31:0] rx, expw;
    realtime tf, tprev, tw;
    #5000 rst_n = 1'b1;
    repeat (2) @(posedge clk40);
    @(posedge clk40); tw = $realtime;
    @(posedge frame); tf = $realtime;
    checks++;
    if (tf - tw < 781.0 || tf - tw > 781.5) begin failures++; $display("FAIL frame %0f ps after word edge", tf - tw); end
    for (int k = 0; k < 50; k++) begin
      expw = last_word;
      tprev = $realtime;
      rx = '0;
      for (int i = 0; i < 32; i++) begin
        @(negedge clk1280);
        rx = {rx[30:0], sout};
      end
      checks++;
      if (rx != expw) begin failures++; $display("FAIL word %0d: got %h expected %h", k, rx, expw); end
      @(posedge frame);
      checks++;
      if ($realtime - tprev < 24999.0 || $realtime - tprev > 25001.0) begin
        failures++; $display("FAIL frame spacing %0f", $realtime - tprev);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

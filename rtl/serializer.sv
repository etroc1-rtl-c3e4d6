// serializer: 32:1 serializer, 32-bit words at 40 MHz to 1.28 Gbps.
//
// Runs on the 1.28 GHz bit clock (CLKBit). The 40 MHz word clock (CLKWord) is
// sampled on the falling bit-clock edge, and at the first rising bit-clock
// edge after that (one bit clock after the word-clock edge when both clocks
// come from the same source) the word is loaded into a 32-bit shift
// register, which then shifts left once per bit clock. sout is the
// register's MSB, so words go out MSB first, one bit per 781.25 ps, 32 bits
// per 25 ns. The word must be stable at the load edge, which holds for words
// registered on the word-clock edge. The 32-bit width and rate are the source's; the
// loading scheme and bit order are this design's choice.
module serializer #(
  parameter int unsigned W = 32
) (
  input  logic         clk1280,
  input  logic         rst_n,
  input  logic         clk40,
  input  logic [W-1:0] word,
  output logic         sout,
  output logic         frame      // high while the MSB of a word is on sout
);
  timeunit 1ps; timeprecision 1fs;

  logic c40_s, c40_d;
  logic [W-1:0] sh;

  always_ff @(negedge clk1280 or negedge rst_n) begin
    if (!rst_n) c40_s <= 1'b0;
    else        c40_s <= clk40;
  end

  always_ff @(posedge clk1280 or negedge rst_n) begin
    if (!rst_n) begin
      c40_d <= 1'b0;
      sh    <= '0;
      frame <= 1'b0;
    end else begin
      c40_d <= c40_s;
      if (c40_s && !c40_d) begin
        sh    <= word;
        frame <= 1'b1;
      end else begin
        sh    <= {sh[W-2:0], 1'b0};
        frame <= 1'b0;
      end
    end
  end

  assign sout = sh[W-1];
endmodule

// prbs7: PRBS7 test pattern generator, one 32-bit word per 40 MHz clock.
//
// A 7-bit linear feedback shift register with polynomial x^7 + x^6 + 1 (the
// usual PRBS7; the source names PRBS7 and a 32-bit test pattern) is stepped
// 32 times per clock. The first bit in time is the word's MSB, so the
// serialized stream is the plain PRBS7 sequence (period 127 bits).
// Reset loads all ones. dout is registered and changes on each rising clk
// edge while en is high.
module prbs7 #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [W-1:0] dout
);
  timeunit 1ps; timeprecision 1fs;

  logic [6:0] lfsr, nlfsr;
  logic [W-1:0] nword;

  always_comb begin
    logic [6:0] s;
    s = lfsr;
    for (int i = W - 1; i >= 0; i--) begin
      nword[i] = s[6] ^ s[5];
      s = {s[5:0], nword[i]};
    end
    nlfsr = s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= '1;
      dout <= '0;
    end else if (en) begin
      lfsr <= nlfsr;
      dout <= nword;
    end
  end
endmodule

// scrambler: self-synchronous scrambler for the 30-bit diagnostic readout
// word.
//
// The source names a scrambler on the 30-bit TDC word, ahead of a 2-bit
// header, but not its polynomial. This design uses x^58 + x^39 + 1, the
// self-synchronous scrambler of 64b/66b links, whose 2-bit-header framing
// the readout word resembles: each output bit is the input bit XOR the
// scrambled bits sent 39 and 58 bits earlier. Bits are processed MSB first,
// the order in which the serializer sends them. A receiver descrambles with
// the same taps on the received bits and locks after 58 bits without any
// shared state.
// Timing: dout is combinational from din and the state; the state (the last
// 58 scrambled bits) advances on each rising clk edge when en is high.
module scrambler #(
  parameter int unsigned W = 30
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  timeunit 1ps; timeprecision 1fs;

  logic [57:0] state, nstate;

  always_comb begin
    logic [57:0] s;
    s = state;
    for (int i = W - 1; i >= 0; i--) begin
      dout[i] = din[i] ^ s[38] ^ s[57];
      s = {s[56:0], dout[i]};
    end
    nstate = s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state <= '0;
    else if (en) state <= nstate;
  end
endmodule

// strobe_gen: TDC reference strobe generator.
//
// Eight flip-flops in a chain, clocked at 320 MHz, sample the 40 MHz clock;
// tap k therefore holds the 40 MHz clock delayed by k+1 periods of 320 MHz.
// The mask is "tap POS-1 high and tap POS+1 low", which is true for exactly
// two 320 MHz cycles per 40 MHz period. The mask is retimed on the falling
// edge of the 320 MHz clock and ANDed with it, which gives a strobe of two
// clean 320 MHz pulses, one 3.125 ns apart, once every 25 ns. The TDC
// registers its delay line on both pulses (double-strobe self-calibration).
// The 8-DFF chain and the two pulses are the source's; the mask logic and
// the pulse position (POS = 6: pulses about 18.75 and 21.9 ns after the
// 40 MHz rising edge) are this design's choice. clk40_out is the 40 MHz
// clock retimed by the first flip-flop of the chain, so that the clock and
// the strobe leave the generator with a fixed relation: the strobe pulses
// rise 6 and 7 periods of 320 MHz after the rising edge of clk40_out.
// Interface: clk320 and clk40 from the clock multiplexer, rst_n active low.
module strobe_gen #(
  parameter int unsigned N_DFF = 8,
  parameter int unsigned POS = 6
) (
  input  logic clk320,
  input  logic clk40,
  input  logic rst_n,
  output logic strobe,
  output logic clk40_out
);
  timeunit 1ps; timeprecision 1fs;

  logic [N_DFF-1:0] chain;
  always_ff @(posedge clk320 or negedge rst_n) begin
    if (!rst_n) chain <= '0;
    else        chain <= {chain[N_DFF-2:0], clk40};
  end

  logic mask;
  always_ff @(negedge clk320 or negedge rst_n) begin
    if (!rst_n) mask <= 1'b0;
    else        mask <= chain[POS-1] && !chain[POS+1];
  end

  assign strobe = clk320 && mask;
  assign clk40_out = chain[0];
endmodule

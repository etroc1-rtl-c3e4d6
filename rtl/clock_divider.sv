// clock_divider: divides the 1.28 GHz input clock by 32 to make 40 MHz.
//
// A 5-bit counter runs on the 1.28 GHz clock; the 40 MHz output is its MSB,
// so it has a 50% duty cycle and rises when the counter wraps from 31 to 0.
// The division ratio is the source's (1.28 GHz to 40 MHz); building it as a
// binary counter is this design's choice. The counter value is also output
// so other 1.28 GHz logic can find the 40 MHz edge. Reset is asynchronous,
// active low; after reset the output rises at the first input edge.
module clock_divider #(
  parameter int unsigned DIV = 32
) (
  input  logic                   clk1280,
  input  logic                   rst_n,
  output logic                   clk40,
  output logic [$clog2(DIV)-1:0] phase
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned PW = $clog2(DIV);
  logic [PW-1:0] nxt;
  assign nxt = (phase == PW'(DIV - 1)) ? '0 : phase + 1'b1;

  always_ff @(posedge clk1280 or negedge rst_n) begin
    if (!rst_n) phase <= PW'(DIV - 1);
    else        phase <= nxt;
  end

  // High while the count is in its first half, so the rising edge comes
  // with the wrap to 0.
  always_ff @(posedge clk1280 or negedge rst_n) begin
    if (!rst_n) clk40 <= 1'b0;
    else        clk40 <= nxt < PW'(DIV / 2);
  end
endmodule

// circ_buffer: per-pixel circular buffer of the simple readout (SRO).
//
// A DEPTH x W memory. While we is high it stores the pixel's TDC word at the
// shared write address every 40 MHz clock, hit or no hit, so it always holds
// the last DEPTH bunch crossings; the SRO controller advances the address and
// drops we to freeze the content after a trigger. The read port is
// synchronous: dout shows the word at raddr one clock later. The source gives
// the function and the per-pixel placement; the depth (256, matching an 8-bit
// readout depth setting) and the write-every-cycle policy are this design's
// reading of it (the source attributes the observed 40 MHz noise to clock
// activity in this memory). The array has no reset; before the first DEPTH
// clocks after power-up it holds arbitrary words, as the chip memory does.
module circ_buffer #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W = 30,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  din,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  dout
);
  timeunit 1ps; timeprecision 1fs;

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= din;
    dout <= mem[raddr];
  end
endmodule

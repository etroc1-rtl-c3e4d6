// tdc_delay_line: behavioural model of the cyclic TDC delay line.
//
// This is a behavioural model, not synthesizable logic: the real line is a
// chain of full-custom NAND cells whose delay sets the TDC bin. Here each
// cell is a NAND with a fixed delay CELL_DELAY_PS.
//
// Structure (as drawn in the TDC core schematic): 63 NAND cells D0..D62. The
// first NAND takes START and the last tap D62, the others have one input tied
// high, so they act as inverters. With START low the line rests in the
// alternating pattern D0=1, D1=0, ... D62=1. When START rises the line rings
// with a period of 126 cell delays; it stops and returns to rest when START
// falls. The cell delay default equals the 17.8 ps TOA bin reported for the
// chip; the delay value itself is this model's choice.
module tdc_delay_line #(
  parameter int unsigned N_CELLS = 63,
  parameter real CELL_DELAY_PS = 17.8
) (
  input  logic               start,
  output logic [N_CELLS-1:0] taps
);
  timeunit 1ps; timeprecision 1fs;

  assign #(CELL_DELAY_PS) taps[0] = ~(start & taps[N_CELLS-1]);
  for (genvar i = 1; i < N_CELLS; i++) begin : g_cell
    assign #(CELL_DELAY_PS) taps[i] = ~(taps[i-1] & 1'b1);
  end
endmodule

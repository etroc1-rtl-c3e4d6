// clock_gen: ETROC1 clock system.
//
// Follows the source's clock diagram. The 1.28 GHz input (after the line
// receiver) is divided to 40 MHz; the phase shifter makes 320 MHz and rotates
// both clocks in 97.66 ps steps. MUX1 (select test_clk0) picks the internal
// 40/320 MHz pair (0) or an off-chip pair (1). Its output feeds the TDC
// reference strobe generator and MUX2. MUX2 (select test_clk1) sends to the
// H-tree either the strobe generator's 40 MHz and strobe (0) or the raw
// 40 MHz and 320 MHz (1); the same pair goes out through the line drivers.
// The off-chip "optional 1.28 GHz" input of the diagram is used here as the
// 320 MHz clock, as the text says MUX1 chooses between internal and external
// 40 and 320 MHz clocks. Reset (rst_n, active low) is this design's addition.
// Outputs change on clock edges only; the multiplexers are combinational and
// are meant to be switched while the clocks are idle.
module clock_gen #(
  parameter int unsigned PHASE_W = 8
) (
  input  logic               clk1280,
  input  logic               rst_n,
  input  logic               ext_clk40,
  input  logic               ext_clk320,
  input  logic               test_clk0,
  input  logic               test_clk1,
  input  logic [PHASE_W-1:0] phase_sel,
  output logic               tree_clk40,
  output logic               tree_strobe,
  output logic               clk320
);
  timeunit 1ps; timeprecision 1fs;

  logic       div40;
  logic [4:0] div_phase;
  logic       ps40, ps320;
  logic       m1_40, m1_320;
  logic       sg40, sg_strobe;

  clock_divider #(.DIV(32)) u_div (
    .clk1280(clk1280), .rst_n(rst_n), .clk40(div40), .phase(div_phase)
  );

  phase_shifter #(.PHASE_W(PHASE_W)) u_ps (
    .clk1280(clk1280), .clk40_in(div40), .phase_sel(phase_sel),
    .clk40(ps40), .clk320(ps320)
  );

  // MUX1
  assign m1_40  = test_clk0 ? ext_clk40  : ps40;
  assign m1_320 = test_clk0 ? ext_clk320 : ps320;

  strobe_gen #(.N_DFF(8), .POS(6)) u_sg (
    .clk320(m1_320), .clk40(m1_40), .rst_n(rst_n),
    .strobe(sg_strobe), .clk40_out(sg40)
  );

  // MUX2
  assign tree_clk40  = test_clk1 ? m1_40  : sg40;
  assign tree_strobe = test_clk1 ? m1_320 : sg_strobe;
  assign clk320      = m1_320;

  logic unused;
  assign unused = ^div_phase;
endmodule

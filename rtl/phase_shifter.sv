// phase_shifter: behavioural model of the DLL-based clock phase shifter.
//
// This is a behavioural model: on the chip the delay comes from a shared
// delay-locked loop, which is analog. It makes the 320 MHz clock from the
// 1.28 GHz clock (divide by 4, aligned to the 40 MHz rising edge) and delays
// both the 40 MHz and the 320 MHz clock by phase_sel steps of one eighth of
// the 1.28 GHz period, 97.66 ps, which is the step the source reports
// (97.6 ps). 256 steps cover one 40 MHz period, i.e. the full 360 degrees;
// the 8-bit width of phase_sel is derived from that. For 320 MHz the same
// delay wraps every 3.125 ns. The delay is a transport delay, so a change of
// phase_sel takes effect on the next clock edge.
module phase_shifter #(
  parameter int unsigned PHASE_W = 8,
  parameter real STEP_PS = 97.65625
) (
  input  logic               clk1280,
  input  logic               clk40_in,
  input  logic [PHASE_W-1:0] phase_sel,
  output logic               clk40,
  output logic               clk320
);
  timeunit 1ps; timeprecision 1fs;

  // 320 MHz: divide the 1.28 GHz clock by 4, re-aligned at each 40 MHz
  // rising edge. The 40 MHz clock is sampled on the falling bit-clock edge,
  // half a bit period after it changes, and the 320 MHz clock rises one bit
  // period after the 40 MHz clock.
  logic [1:0] ph4;
  logic       c40_s, c40_d;
  logic       clk320_int;
  always_ff @(negedge clk1280) c40_s <= clk40_in;
  always_ff @(posedge clk1280) begin
    c40_d <= c40_s;
    ph4   <= (c40_s && !c40_d) ? 2'd1 : ph4 + 2'd1;
  end
  assign clk320_int = (ph4 == 2'd1) || (ph4 == 2'd2);

  real delay_ps;
  assign delay_ps = real'(phase_sel) * STEP_PS;

  initial begin
    clk40 = 1'b0;
    clk320 = 1'b0;
  end
  // Transport delay: every edge is scheduled on its own, so delays longer
  // than half a clock period keep all edges.
  always @(clk40_in) begin
    automatic logic v = clk40_in;
    automatic real d = delay_ps;
    if (d > 0.0) begin
      fork
        begin #(d) clk40 = v; end
      join_none
    end else begin
      clk40 = v;
    end
  end
  always @(clk320_int) begin
    automatic logic v = clk320_int;
    automatic real d = delay_ps;
    if (d > 0.0) begin
      fork
        begin #(d) clk320 = v; end
      join_none
    end else begin
      clk320 = v;
    end
  end
endmodule

// active_pixel: digital part of one ETROC1 active pixel.
//
// The pixel's analog chain (bump pad, charge injection, pre-amplifier,
// discriminator with its threshold DAC) ends in the discriminator output,
// which enters here as hit. The pixel TDC converts each hit into a 30-bit
// word (hit flag, TOA, TOT, Cal) once per 40 MHz clock; that word goes to the
// diagnostic readout buffer (tdc_data) and into the pixel's circular buffer
// for the simple readout, whose shared write/read addresses come from the
// SRO controller. Timing: tdc_data changes at each clk40 rising edge; the
// buffer stores it at the next edge while mem_we is high; mem_dout follows
// raddr by one clock.
module active_pixel
  import etroc1_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned CNT_W = 3,
  parameter real CELL_DELAY_PS = 17.8,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk40,
  input  logic          rst_n,
  input  logic          hit,
  input  logic          strobe,
  input  logic          mem_we,
  input  logic [AW-1:0] waddr,
  input  logic [AW-1:0] raddr,
  output tdc_data_t     tdc_data,
  output tdc_data_t     mem_dout
);
  timeunit 1ps; timeprecision 1fs;

  tdc #(.CNT_W(CNT_W), .CELL_DELAY_PS(CELL_DELAY_PS)) u_tdc (
    .clk40(clk40), .rst_n(rst_n), .hit(hit), .strobe(strobe), .data(tdc_data)
  );

  circ_buffer #(.DEPTH(DEPTH), .W(TDC_W)) u_mem (
    .clk(clk40), .we(mem_we), .waddr(waddr), .din(tdc_data), .raddr(raddr), .dout(mem_dout)
  );
endmodule

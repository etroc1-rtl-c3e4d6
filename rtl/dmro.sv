// dmro: diagnostic mode readout.
//
// Streams the TDC word of one selected pixel every 40 MHz clock, following
// the source's DMRO diagram:
//   1. Each pixel has a buffer register with an enable; a disabled buffer
//      drives zero, so the buffers of one column share a column data lane
//      (modelled as the OR of the buffers; enable at most one pixel per
//      column).
//   2. MUX1 picks one of the column lanes (col_sel).
//   3. The scrambler scrambles the 30-bit word; MUX2 picks the scrambled or
//      the plain word (scr_en).
//   4. A 2-bit header (2'b10, this design's choice) makes it 32 bits.
//   5. The last multiplexer sends either that word or the 32-bit PRBS7 test
//      pattern (prbs_en) to the serializer.
// Timing: pixel data sampled at clock edge k appears in word after edge k+1
// (pixel buffer, then output register). The scrambler
// runs only while scr_en is high, the PRBS generator only while prbs_en is.
module dmro
  import etroc1_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4,
  localparam int unsigned N = ROWS * COLS
) (
  input  logic              clk40,
  input  logic              rst_n,
  input  tdc_data_t [N-1:0] pix_data,
  input  logic [N-1:0]      pix_en,
  input  logic [1:0]        col_sel,
  input  logic              scr_en,
  input  logic              prbs_en,
  output logic [31:0]       word
);
  timeunit 1ps; timeprecision 1fs;

  tdc_data_t [N-1:0]     buf_q;
  tdc_data_t [COLS-1:0] lane;
  tdc_data_t             sel;
  logic [TDC_W-1:0]      scr_out;
  logic [31:0]           prbs_word;

  // pixel buffers with enable
  always_ff @(posedge clk40 or negedge rst_n) begin
    if (!rst_n) buf_q <= '0;
    else
      for (int p = 0; p < N; p++) buf_q[p] <= pix_en[p] ? pix_data[p] : '0;
  end

  // column lanes: pixel p = COLS*row + col
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      lane[c] = '0;
      for (int r = 0; r < ROWS; r++) lane[c] = lane[c] | buf_q[COLS*r + c];
    end
  end

  // MUX1
  assign sel = (int'(col_sel) < COLS) ? lane[col_sel] : '0;

  scrambler #(.W(TDC_W)) u_scr (
    .clk(clk40), .rst_n(rst_n), .en(scr_en), .din(sel), .dout(scr_out)
  );

  prbs7 #(.W(32)) u_prbs (
    .clk(clk40), .rst_n(rst_n), .en(prbs_en), .dout(prbs_word)
  );

  // MUX2, header, test-pattern MUX. The PRBS word is already registered.
  logic [31:0] data_word;
  always_ff @(posedge clk40 or negedge rst_n) begin
    if (!rst_n) data_word <= '0;
    else        data_word <= {DMRO_HEADER, scr_en ? scr_out : TDC_W'(sel)};
  end
  logic prbs_q;
  always_ff @(posedge clk40 or negedge rst_n) begin
    if (!rst_n) prbs_q <= 1'b0;
    else        prbs_q <= prbs_en;
  end
  assign word = prbs_q ? prbs_word : data_word;
endmodule

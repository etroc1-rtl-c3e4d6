// etroc1_pkg: types and constants shared by the ETROC1 digital blocks.
//
// The 30-bit TDC word follows the order printed on the pixel data bus of the
// diagnostic readout: hit flag, 10-bit TOA, 9-bit TOT, 10-bit calibration code.
// The SRO frame words and the DMRO header value are this design's own choice;
// the source describes the fields but not their encoding.
package etroc1_pkg;
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned TOA_W = 10;
  localparam int unsigned TOT_W = 9;
  localparam int unsigned CAL_W = 10;
  localparam int unsigned TDC_W = 1 + TOA_W + TOT_W + CAL_W;  // 30
  localparam int unsigned WORD_W = 32;                         // serializer word

  // Delay line geometry: 63 cells, so one ring period is 126 cell delays.
  localparam int unsigned N_CELLS = 63;
  localparam int unsigned RING_BINS = 2 * N_CELLS;
  // Resting pattern of the line with START low: D0=1, D1=0, D2=1, ...
  localparam logic [N_CELLS-1:0] RING_REST = N_CELLS'({32{2'b01}});

  typedef struct packed {
    logic             hit;
    logic [TOA_W-1:0] toa;
    logic [TOT_W-1:0] tot;
    logic [CAL_W-1:0] cal;
  } tdc_data_t;

  // Pixel array: 4 x 4, pixel p = 4*row + col.
  localparam int unsigned N_ROW = 4;
  localparam int unsigned N_COL = 4;
  localparam int unsigned N_PIX = N_ROW * N_COL;

  // DMRO: 2-bit header in front of the (optionally scrambled) TDC word.
  localparam logic [1:0] DMRO_HEADER = 2'b10;

  // SRO frame words.
  localparam logic [1:0] SRO_HDR_CTRL = 2'b01;
  localparam logic [1:0] SRO_HDR_DATA = 2'b10;
  localparam logic [5:0] SRO_SOF = 6'h3C;
  localparam logic [5:0] SRO_EOF = 6'h3D;
  localparam logic [5:0] SRO_IDLE = 6'h3F;

  // LHC orbit: bunch crossings 0..3563.
  localparam int unsigned BCID_MAX = 3563;

  // I2C register map (per slave): 0x00-0x1F config, 0x20-0x2F status, 0x30 id.
  localparam int unsigned I2C_N_CFG = 32;
  localparam int unsigned I2C_N_STAT = 16;
  localparam logic [7:0] I2C_STAT_BASE = 8'h20;
  localparam logic [7:0] I2C_ID_ADDR = 8'h30;
endpackage

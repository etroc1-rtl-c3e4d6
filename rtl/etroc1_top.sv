// etroc1_top: digital top level of the ETROC1 pixel readout chip.
//
// ETROC1 reads out a 4 x 4 array of LGAD pixels (plus one standalone test
// pixel) with precision timing: every pixel digitises the time of arrival
// (TOA) and time over threshold (TOT) of its discriminator pulse with a
// delay-line TDC. This module wires the chip's digital blocks as the source
// describes them:
//   * clock_gen: 1.28 GHz in, 40 MHz / 320 MHz with phase shift, TDC
//     reference strobe, test multiplexers; its 40 MHz clock and strobe reach
//     all pixels through the H-tree (here: plain fan-out wires).
//   * 16 active_pixel (TDC + circular buffer), pixel p = 4*row + col.
//   * dmro + serializer: one selected pixel streamed continuously at
//     1.28 Gbps (dmro_sout).
//   * sro + serializer: L1Accept-triggered readout of the circular buffers
//     at 1.28 Gbps (sro_sout).
//   * standalone pixel: a TDC with its own one-pixel DMRO and serializer
//     (sa_dmro_sout).
//   * TDC test block: a bare TDC whose 30-bit word is a chip output.
//   * two i2c_slave on one bus: 0x10 pixel configuration, 0x11 periphery.
// The analog front end is outside this RTL: discriminator outputs enter as
// disc / sa_disc, and the settings for charge injection, pre-amplifier,
// discriminator hysteresis and threshold DACs leave as ports. The register
// map below is this design's own; the source gives the register counts only.
//
// Slave 0x10 (config bytes): 0-19 threshold DAC codes, pixel p in bits
// 10p+9..10p of bytes 0-19 read as one little-endian 160-bit word;
// 20 [4:0] charge select; 21-22 charge injection enable per pixel;
// 23 [2:0] PA IBSel, [4:3] RFSel, [6:5] CLSel; 24 [3:0] hysteresis;
// 25 [0] standalone pixel charge injection enable; 26-27 standalone DAC.
// Status: 0-3 last hit word of the TDC test block, 4-7 last hit word of the
// standalone pixel (little-endian).
// Slave 0x11 (config bytes): 0 phase code; 1 [0] TestCLK0, [1] TestCLK1;
// 2 DMRO [1:0] column, [2] scrambler on, [3] PRBS7; 3-4 DMRO pixel enables;
// 5 standalone DMRO [0] enable, [1] scrambler, [2] PRBS7; 6-7 SRO ROI;
// 8 SRO ADDR_DEPTH. Status: 0-1 BCID of the last L1Accept, 2 SRO frame
// count, 3 [0] SRO busy.
//
// Clocks: everything digital runs on the H-tree 40 MHz clock (tree_clk40),
// the serializers on clk1280. rst_n is an asynchronous active-low reset.
module etroc1_top
  import etroc1_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  parameter logic [3:0] CHIP_REV = 4'h1,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                  clk1280,
  input  logic                  rst_n,
  input  logic                  ext_clk40,
  input  logic                  ext_clk320,
  input  logic                  qinj_in,
  input  logic                  bc0,
  input  logic                  l1a,
  input  logic                  scl,
  input  logic                  sda_in,
  output logic                  sda_oe,
  input  logic [3:0]            chip_id,
  // analog front end
  input  logic [N_PIX-1:0]      disc,
  input  logic                  sa_disc,
  output logic [N_PIX-1:0]      qinj_pulse,
  output logic [N_PIX-1:0]      qinj_en,
  output logic [4:0]            qsel,
  output logic [N_PIX-1:0][9:0] dac_code,
  output logic [2:0]            pa_ibsel,
  output logic [1:0]            pa_rfsel,
  output logic [1:0]            pa_clsel,
  output logic [3:0]            hys_sel,
  output logic                  sa_qinj_en,
  output logic [9:0]            sa_dac_code,
  // TDC test block
  input  logic                  tdc_test_hit,
  output tdc_data_t             tdc_test_data,
  // serial outputs (to the line drivers)
  output logic                  dmro_sout,
  output logic                  sro_sout,
  output logic                  sa_dmro_sout,
  output logic                  clk40_out,
  output logic                  strobe_out
);
  timeunit 1ps; timeprecision 1fs;

  // ------------------------------------------------------------ I2C slaves
  logic [31:0][7:0] cfg0, cfg1;
  logic [15:0][7:0] stat0, stat1;
  logic             oe0, oe1;
  logic             clk40, tree_strobe, clk320;

  i2c_slave #(.SLAVE_ADDR(7'h10)) u_i2c0 (
    .clk(clk40), .rst_n(rst_n), .scl(scl), .sda_in(sda_in), .sda_oe(oe0),
    .chip_id(chip_id), .chip_rev(CHIP_REV), .cfg(cfg0), .stat(stat0)
  );
  i2c_slave #(.SLAVE_ADDR(7'h11)) u_i2c1 (
    .clk(clk40), .rst_n(rst_n), .scl(scl), .sda_in(sda_in), .sda_oe(oe1),
    .chip_id(chip_id), .chip_rev(CHIP_REV), .cfg(cfg1), .stat(stat1)
  );
  assign sda_oe = oe0 | oe1;

  // pixel configuration
  logic [159:0] dac_bits;
  assign dac_bits = cfg0[19:0];
  for (genvar p = 0; p < N_PIX; p++) begin : g_dac
    assign dac_code[p] = dac_bits[10*p +: 10];
  end
  assign qsel        = cfg0[20][4:0];
  assign qinj_en     = {cfg0[22], cfg0[21]};
  assign pa_ibsel    = cfg0[23][2:0];
  assign pa_rfsel    = cfg0[23][4:3];
  assign pa_clsel    = cfg0[23][6:5];
  assign hys_sel     = cfg0[24][3:0];
  assign sa_qinj_en  = cfg0[25][0];
  assign sa_dac_code = {cfg0[27][1:0], cfg0[26]};

  // periphery configuration
  logic [7:0]       phase_sel;
  logic             test_clk0, test_clk1;
  logic [1:0]       dmro_col;
  logic             dmro_scr, dmro_prbs, sa_en, sa_scr, sa_prbs;
  logic [N_PIX-1:0] dmro_en, roi;
  logic [AW-1:0]    addr_depth;
  assign phase_sel  = cfg1[0];
  assign test_clk0  = cfg1[1][0];
  assign test_clk1  = cfg1[1][1];
  assign dmro_col   = cfg1[2][1:0];
  assign dmro_scr   = cfg1[2][2];
  assign dmro_prbs  = cfg1[2][3];
  assign dmro_en    = {cfg1[4], cfg1[3]};
  assign sa_en      = cfg1[5][0];
  assign sa_scr     = cfg1[5][1];
  assign sa_prbs    = cfg1[5][2];
  assign roi        = {cfg1[7], cfg1[6]};
  assign addr_depth = AW'(cfg1[8]);

  // ----------------------------------------------------------- clock system
  clock_gen u_clk (
    .clk1280(clk1280), .rst_n(rst_n), .ext_clk40(ext_clk40), .ext_clk320(ext_clk320),
    .test_clk0(test_clk0), .test_clk1(test_clk1), .phase_sel(phase_sel),
    .tree_clk40(clk40), .tree_strobe(tree_strobe), .clk320(clk320)
  );
  assign clk40_out  = clk40;
  assign strobe_out = tree_strobe;

  // H-tree: the charge injection pulse fans out with the clock and strobe
  assign qinj_pulse = {N_PIX{qinj_in}};

  // ------------------------------------------------------------ pixel array
  tdc_data_t [N_PIX-1:0] pix_data, mem_dout;
  logic                  mem_we;
  logic [AW-1:0]         waddr, raddr;

  for (genvar p = 0; p < N_PIX; p++) begin : g_pix
    active_pixel #(.DEPTH(DEPTH)) u_pix (
      .clk40(clk40), .rst_n(rst_n), .hit(disc[p]), .strobe(tree_strobe),
      .mem_we(mem_we), .waddr(waddr), .raddr(raddr),
      .tdc_data(pix_data[p]), .mem_dout(mem_dout[p])
    );
  end

  // ------------------------------------------------------------------- DMRO
  logic [31:0] dmro_word;
  dmro #(.ROWS(N_ROW), .COLS(N_COL)) u_dmro (
    .clk40(clk40), .rst_n(rst_n), .pix_data(pix_data), .pix_en(dmro_en),
    .col_sel(dmro_col), .scr_en(dmro_scr), .prbs_en(dmro_prbs), .word(dmro_word)
  );
  serializer u_ser_dmro (
    .clk1280(clk1280), .rst_n(rst_n), .clk40(clk40), .word(dmro_word), .sout(dmro_sout), .frame()
  );

  // -------------------------------------------------------------------- SRO
  logic [31:0] sro_word;
  logic        sro_busy;
  logic [11:0] l1a_bcid;
  logic [7:0]  frame_cnt;
  sro #(.ROWS(N_ROW), .COLS(N_COL), .DEPTH(DEPTH)) u_sro (
    .clk40(clk40), .rst_n(rst_n), .bc0(bc0), .l1a(l1a), .roi(roi), .addr_depth(addr_depth),
    .mem_we(mem_we), .waddr(waddr), .raddr(raddr), .mem_dout(mem_dout),
    .word(sro_word), .busy(sro_busy), .l1a_bcid(l1a_bcid), .frame_cnt(frame_cnt)
  );
  serializer u_ser_sro (
    .clk1280(clk1280), .rst_n(rst_n), .clk40(clk40), .word(sro_word), .sout(sro_sout), .frame()
  );

  // -------------------------------------------------------- standalone pixel
  tdc_data_t   sa_data;
  logic [31:0] sa_word;
  tdc u_sa_tdc (.clk40(clk40), .rst_n(rst_n), .hit(sa_disc), .strobe(tree_strobe), .data(sa_data));
  dmro #(.ROWS(1), .COLS(1)) u_sa_dmro (
    .clk40(clk40), .rst_n(rst_n), .pix_data(sa_data), .pix_en(sa_en),
    .col_sel(2'd0), .scr_en(sa_scr), .prbs_en(sa_prbs), .word(sa_word)
  );
  serializer u_ser_sa (
    .clk1280(clk1280), .rst_n(rst_n), .clk40(clk40), .word(sa_word), .sout(sa_dmro_sout), .frame()
  );

  // --------------------------------------------------------- TDC test block
  tdc u_tdc_test (.clk40(clk40), .rst_n(rst_n), .hit(tdc_test_hit), .strobe(tree_strobe), .data(tdc_test_data));

  // ----------------------------------------------------------- status bytes
  logic [31:0] test_last, sa_last;
  always_ff @(posedge clk40 or negedge rst_n) begin
    if (!rst_n) begin
      test_last <= '0;
      sa_last   <= '0;
    end else begin
      if (tdc_test_data.hit) test_last <= 32'(tdc_test_data);
      if (sa_data.hit)       sa_last   <= 32'(sa_data);
    end
  end
  always_comb begin
    stat0 = '0;
    stat0[3:0] = test_last;
    stat0[7:4] = sa_last;
    stat1 = '0;
    stat1[1:0] = 16'(l1a_bcid);
    stat1[2]   = frame_cnt;
    stat1[3]   = {7'h0, sro_busy};
  end

  logic unused;
  assign unused = clk320;
endmodule

// sro: simple readout controller (SRO) of the 4 x 4 pixel array.
//
// Every pixel keeps a circular buffer of its TDC words (circ_buffer). This
// block owns the shared address and the readout, following the source's SRO
// diagram (ADDR counter, BCID counter, readout FSM, column data buses and an
// output MUX to the serializer):
//   * ADDR counter: while running, all buffers are written every 40 MHz clock
//     at the same address, which then advances (mem_we, waddr).
//   * BCID counter: counts bunch crossings, restarted by BC0, wraps after
//     3563 (the LHC orbit; the range is this design's choice).
//   * Readout FSM: L1Accept freezes the buffers (mem_we low) and records the
//     BCID. The FSM then reads, for every pixel selected in ROI[15:0] in
//     ascending order, the ADDR_DEPTH most recent entries, oldest first
//     (ADDR_DEPTH = 0 means all 256). When all is sent the buffers accept
//     data again. L1Accept during a readout is ignored.
//   * Column buses and MUX: the read data of pixel p = 4*row + col travels on
//     column bus col (row selected) and the MUX picks the column.
// Frame on word, one 32-bit word per clock, contiguous (this design's
// format; the source names SOF and EOF only):
//   SOF  = {2'b01, 6'h3C, 4'h0, BCID[11:0], ADDR_DEPTH[7:0]}
//   data = {2'b10, tdc_word[29:0]}
//   EOF  = {2'b01, 6'h3D, 8'h00, number_of_data_words[15:0]}
//   idle = {2'b01, 6'h3F, 24'h0} between frames.
// Timing: with L1Accept sampled at edge e0, SOF is on word after e1, the
// first data word after e2, and EOF after e(N+2), N = data words; writing
// resumes after that edge. The frozen buffers hold the entries written up to
// and including edge e0.
module sro
  import etroc1_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned N = ROWS * COLS,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic              clk40,
  input  logic              rst_n,
  input  logic              bc0,
  input  logic              l1a,
  input  logic [N-1:0]      roi,
  input  logic [AW-1:0]     addr_depth,
  // pixel circular buffers
  output logic              mem_we,
  output logic [AW-1:0]     waddr,
  output logic [AW-1:0]     raddr,
  input  tdc_data_t [N-1:0] mem_dout,
  // to the serializer
  output logic [31:0]       word,
  // status
  output logic              busy,
  output logic [11:0]       l1a_bcid,
  output logic [7:0]        frame_cnt
);
  timeunit 1ps; timeprecision 1fs;

  typedef enum logic [1:0] {S_RUN, S_READ, S_DRAIN, S_EOF} state_t;
  state_t state;

  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1;

  logic [11:0]   bcid;
  logic [AW:0]   depth_n;
  logic [AW-1:0] start, k;
  logic [PW-1:0] pix, rd_pix;
  logic          rd_valid, sof_q;
  logic [15:0]   nwords;

  assign depth_n = (addr_depth == '0) ? (AW+1)'(DEPTH) : {1'b0, addr_depth};
  assign mem_we  = (state == S_RUN);
  assign raddr   = start + k;
  assign busy    = (state != S_RUN);

  // lowest ROI pixel with index >= from, and whether there is one
  function automatic logic [PW:0] next_roi(input logic [N-1:0] r, input int from);
    for (int p = 0; p < N; p++)
      if (p >= from && r[p]) return {1'b1, PW'(p)};
    return '0;
  endfunction

  logic [PW:0] first_p, next_p;
  assign first_p = next_roi(roi, 0);
  assign next_p  = next_roi(roi, int'(pix) + 1);

  // BCID counter
  always_ff @(posedge clk40 or negedge rst_n) begin
    if (!rst_n)                        bcid <= '0;
    else if (bc0)                      bcid <= '0;
    else if (bcid == 12'(BCID_MAX))    bcid <= '0;
    else                               bcid <= bcid + 1'b1;
  end

  // ADDR counter and readout FSM
  always_ff @(posedge clk40 or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_RUN;
      waddr     <= '0;
      start     <= '0;
      k         <= '0;
      pix       <= '0;
      rd_pix    <= '0;
      rd_valid  <= 1'b0;
      sof_q     <= 1'b0;
      nwords    <= '0;
      l1a_bcid  <= '0;
      frame_cnt <= '0;
    end else begin
      rd_valid <= 1'b0;
      sof_q    <= 1'b0;
      unique case (state)
        S_RUN: begin
          waddr <= waddr + 1'b1;
          if (l1a) begin
            l1a_bcid <= bcid;
            start    <= waddr + 1'b1 - AW'(depth_n);
            k        <= '0;
            nwords   <= '0;
            sof_q    <= 1'b1;
            pix      <= first_p[PW-1:0];
            state    <= first_p[PW] ? S_READ : S_DRAIN;
          end
        end
        S_READ: begin
          rd_valid <= 1'b1;
          rd_pix   <= pix;
          nwords   <= nwords + 1'b1;
          if ((AW+1)'(k) == depth_n - 1'b1) begin
            k <= '0;
            if (next_p[PW]) pix <= next_p[PW-1:0];
            else            state <= S_DRAIN;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_DRAIN: state <= S_EOF;
        S_EOF: begin
          state     <= S_RUN;
          frame_cnt <= frame_cnt + 1'b1;
        end
        default: state <= S_RUN;
      endcase
    end
  end

  // column data buses and output MUX
  tdc_data_t [COLS-1:0] col_bus;
  logic [PW-1:0] rd_row, rd_col;
  assign rd_row = rd_pix / PW'(COLS);
  assign rd_col = rd_pix % PW'(COLS);
  always_comb begin
    for (int c = 0; c < COLS; c++) col_bus[c] = mem_dout[COLS*int'(rd_row) + c];
  end

  always_ff @(posedge clk40 or negedge rst_n) begin
    if (!rst_n)        word <= {SRO_HDR_CTRL, SRO_IDLE, 24'h0};
    else if (sof_q)    word <= {SRO_HDR_CTRL, SRO_SOF, 4'h0, l1a_bcid, 8'(addr_depth)};
    else if (rd_valid) word <= {SRO_HDR_DATA, col_bus[rd_col]};
    else if (state == S_EOF) word <= {SRO_HDR_CTRL, SRO_EOF, 8'h00, nwords};
    else               word <= {SRO_HDR_CTRL, SRO_IDLE, 24'h0};
  end

endmodule

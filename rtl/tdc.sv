// tdc: ETROC1 pixel time-to-digital converter (TOA, TOT and calibration).
//
// How it works. The discriminator output (hit) starts a cyclic delay line of
// 63 cells that rings with a period of 126 cell delays (17.8 ps each). Three
// recorders, drawn in the source's TDC core schematic, take snapshots of it:
//   * TOA/CAL fine recorder: 63 flip-flops C0..C62 on every tap, clocked by
//     TOACLK, the reference strobe. The strobe carries two pulses one 320 MHz
//     period (3.125 ns) apart, so the ring is registered twice ("double
//     strobe"). The first snapshot gives TOA, the difference of the two gives
//     the calibration code: the number of bins in 3.125 ns, which tracks
//     process, voltage and temperature.
//   * TOT fine recorder: 32 flip-flops T0..T31 on the even taps D0, D2 .. D62,
//     clocked by TOTCLK, the trailing edge of the hit. Its bin is two cells.
//   * A ripple counter clocked by tap D31 counts ring laps; it is sampled with
//     each recorder.
// The encoder turns a snapshot into a count of cell delays since START:
//   code = 126 * laps + phase,
// where phase (0..125) is read from which taps differ from the resting
// pattern, and laps is the counter value less one if D31 has already risen
// in the current lap (phase >= 32).
//
// Control, which the source does not describe, is this design's own: START is
// set by the rising edge of hit and cleared at the next rising edge of clk40,
// which also registers the result. A hit is flagged only when both strobe
// pulses arrived while the ring ran; TOT reads 511 when the trailing edge came
// after the clear. The 3-bit counter covers 8 laps (17.9 ns).
//
// Interface and timing. clk40 is the TDC 40 MHz clock, strobe the TDC
// reference strobe, hit the discriminator output. data (30 bits: hit, TOA,
// TOT, Cal) is updated at each clk40 rising edge for the hit that started in
// the period just ended. TOA = time from hit to first strobe pulse in 17.8 ps
// bins; TOT = pulse width in 35.6 ps bins; Cal about 176.
//
// Asynchronous by nature: hit, strobe and the delay-line taps are clocks here.
// START and its clear form a self-timed pair (the clear falls as soon as START
// has fallen); lint reports the resulting derived clocks and async resets.
module tdc
  import etroc1_pkg::*;
#(
  parameter int unsigned CNT_W = 3,
  parameter real CELL_DELAY_PS = 17.8
) (
  input  logic      clk40,
  input  logic      rst_n,
  input  logic      hit,
  input  logic      strobe,
  output tdc_data_t data
);
  timeunit 1ps; timeprecision 1fs;

  logic               start;   // ring enable
  logic               clr;     // self-timed clear of START
  logic [N_CELLS-1:0] taps;

  // ---------------------------------------------------------------- START
  always_ff @(posedge hit or posedge clr or negedge rst_n) begin
    if (!rst_n)   start <= 1'b0;
    else if (clr) start <= 1'b0;
    else          start <= 1'b1;
  end

  always_ff @(posedge clk40 or negedge start) begin
    if (!start) clr <= 1'b0;
    else        clr <= 1'b1;
  end

  tdc_delay_line #(.N_CELLS(N_CELLS), .CELL_DELAY_PS(CELL_DELAY_PS)) u_line (
    .start(start), .taps(taps)
  );

  // ------------------------------------------------------- ripple counter
  // Toggle flip-flops: bit 0 on the rising edge of D31 (through a
  // transparent latch in the schematic), bit k on the falling edge of bit k-1.
  // Cleared while START is low; the chip reset clears them too, so that they
  // start from zero even if START never fell since power-up.
  logic [CNT_W-1:0] cnt;
  for (genvar k = 0; k < CNT_W; k++) begin : g_ripple
    logic q;
    if (k == 0) begin : g_first
      always_ff @(posedge taps[31] or negedge start or negedge rst_n) begin
        if (!start || !rst_n) q <= 1'b0;
        else        q <= ~q;
      end
    end else begin : g_next
      always_ff @(negedge cnt[k-1] or negedge start or negedge rst_n) begin
        if (!start || !rst_n) q <= 1'b0;
        else        q <= ~q;
      end
    end
    assign cnt[k] = q;
  end

  // ------------------------------------------------------- TOA/CAL recorder
  logic [N_CELLS-1:0] toa_rec;
  logic [CNT_W-1:0]   toa_cnt;
  logic               toa_live;   // ring was running at this strobe edge
  always_ff @(posedge strobe) begin
    toa_rec  <= taps;
    toa_cnt  <= cnt;
    toa_live <= start;
  end

  // The single recorder is reused by both strobe pulses: its content is
  // copied out on the falling edge of each pulse.
  logic [1:0]         n_strobe;
  logic [N_CELLS-1:0] rec1, rec2;
  logic [CNT_W-1:0]   cnt1, cnt2;
  always_ff @(negedge strobe or negedge start or negedge rst_n) begin
    if (!start || !rst_n) n_strobe <= '0;
    else if (toa_live && n_strobe != 2'd2) n_strobe <= n_strobe + 2'd1;
  end
  always_ff @(negedge strobe) begin
    if (toa_live && n_strobe == 2'd0) begin rec1 <= toa_rec; cnt1 <= toa_cnt; end
    if (toa_live && n_strobe == 2'd1) begin rec2 <= toa_rec; cnt2 <= toa_cnt; end
  end

  // ----------------------------------------------------------- TOT recorder
  logic [31:0]      tot_rec;
  logic [CNT_W-1:0] tot_cnt;
  logic             tot_done;
  always_ff @(negedge hit) begin
    for (int k = 0; k < 32; k++) tot_rec[k] <= taps[2*k];
    tot_cnt <= cnt;
  end
  always_ff @(negedge hit or negedge start or negedge rst_n) begin
    if (!start || !rst_n) tot_done <= 1'b0;
    else        tot_done <= 1'b1;
  end

  // ---------------------------------------------------------------- encoder
  // Full-resolution code from a 63-tap snapshot, in cell delays.
  function automatic logic [10:0] toa_code(input logic [N_CELLS-1:0] rec,
                                           input logic [CNT_W-1:0] c);
    logic [N_CELLS-1:0] f;
    logic [6:0] n, p;
    logic [CNT_W-1:0] laps;
    f = rec ^ RING_REST;
    n = 7'($countones(f));
    if (f[0])        p = n;
    else if (n == 0) p = 7'd0;
    else             p = 7'(RING_BINS) - n;
    laps = (p >= 7'd32) ? c - CNT_W'(1) : c;
    return 11'(laps) * 11'(RING_BINS) + 11'(p);
  endfunction

  // Half-resolution code from the 32 even taps, in units of two cells.
  function automatic logic [9:0] tot_code(input logic [31:0] rec,
                                          input logic [CNT_W-1:0] c);
    logic [31:0] f;
    logic [5:0] n, q;
    logic [CNT_W-1:0] laps;
    f = ~rec;  // even taps rest high
    n = 6'($countones(f));
    if (f[0])        q = n;
    else if (n == 0) q = 6'd0;
    else             q = 6'(N_CELLS) - n;
    laps = (q >= 6'd16) ? c - CNT_W'(1) : c;
    return 10'(laps) * 10'(N_CELLS) + 10'(q);
  endfunction

  logic [10:0] code1, code2, cal_full;
  logic [9:0]  tot_full;
  always_comb begin
    code1    = toa_code(rec1, cnt1);
    code2    = toa_code(rec2, cnt2);
    cal_full = code2 - code1;
    tot_full = tot_code(tot_rec, tot_cnt);
  end

  always_ff @(posedge clk40 or negedge rst_n) begin
    if (!rst_n) begin
      data <= '0;
    end else if (start && n_strobe == 2'd2) begin
      data.hit <= 1'b1;
      data.toa <= (code1 > 11'(2**TOA_W - 1)) ? '1 : TOA_W'(code1);
      data.cal <= (cal_full > 11'(2**CAL_W - 1)) ? '1 : CAL_W'(cal_full);
      data.tot <= (!tot_done || tot_full > 10'(2**TOT_W - 1)) ? '1 : TOT_W'(tot_full);
    end else begin
      data <= '0;
    end
  end
endmodule

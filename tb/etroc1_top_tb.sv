// etroc1_top_tb: end-to-end test of the ETROC1 digital top at its default
// size (4 x 4 pixels, 256-deep circular buffers).
//
// A 1.28 GHz clock drives the chip; an I2C master configures it; pulses on
// the discriminator inputs play the role of LGAD hits. The three 1.28 Gbps
// serial outputs are deserialized here (word boundaries follow the chip's
// 40 MHz clock output) and decoded. Expected TDC codes come from the hit
// times: TOA = (18.75 ns - hit time in the 25 ns period) / 17.8 ps,
// TOT = width / 35.6 ps, Cal = 3.125 ns / 17.8 ps, each +-1 bin.
// Mechanisms exercised and counted (each must happen at least once):
// I2C configuration and readback, chip ID, TDC hits through DMRO, standalone
// pixel and TDC test block, a hit after the strobes (not flagged), TOT
// saturation, SRO frame on L1Accept, L1Accept ignored while busy, DMRO
// scrambler, PRBS7 pattern, a single-event upset in a triplicated register,
// phase shift of the 40 MHz clock, and the TestCLK1 clock switch.
module etroc1_top_tb;
  timeunit 1ps; timeprecision 1fs;
  import etroc1_pkg::*;

  localparam real TD = 17.8;
  localparam real TS1 = 18750.0;

  logic clk1280 = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act
  logic bc0 = 1'b0, l1a = 1'b0;
  logic [15:0] disc = '0;
  logic sa_disc = 1'b0, test_hit = 1'b0;
  logic scl, m_oe, s_oe, sda;
  logic [15:0] qinj_pulse, qinj_en;
  logic [4:0] qsel;
  logic [15:0][9:0] dac_code;
  logic [2:0] ibsel;
  logic [1:0] rfsel, clsel;
  logic [3:0] hys;
  logic sa_qinj_en;
  logic [9:0] sa_dac;
  tdc_data_t test_data;
  logic dmro_sout, sro_sout, sa_sout, clk40, strobe_out;
  int checks = 0, failures = 0;

  assign sda = !(m_oe || s_oe);

  etroc1_top dut (
    .clk1280(clk1280), .rst_n(rst_n), .ext_clk40(1'b0), .ext_clk320(1'b0), .qinj_in(1'b0),
    .bc0(bc0), .l1a(l1a), .scl(scl), .sda_in(sda), .sda_oe(s_oe), .chip_id(4'h5),
    .disc(disc), .sa_disc(sa_disc), .qinj_pulse(qinj_pulse), .qinj_en(qinj_en), .qsel(qsel),
    .dac_code(dac_code), .pa_ibsel(ibsel), .pa_rfsel(rfsel), .pa_clsel(clsel), .hys_sel(hys),
    .sa_qinj_en(sa_qinj_en), .sa_dac_code(sa_dac),
    .tdc_test_hit(test_hit), .tdc_test_data(test_data),
    .dmro_sout(dmro_sout), .sro_sout(sro_sout), .sa_dmro_sout(sa_sout),
    .clk40_out(clk40), .strobe_out(strobe_out)
  );
  i2c_master #(.HALF_NS(200.0)) m (.scl(scl), .sda_oe(m_oe), .sda(sda));

  always #390.625 clk1280 = ~clk1280;

  // ------------------------------------------------------------ counters
  typedef enum int {M_CFG, M_ID, M_DMRO_HIT, M_SA_HIT, M_TEST_HIT, M_LATE, M_TOT_SAT, M_SRO_FRAME,
                    M_L1A_IGNORED, M_SCR, M_PRBS, M_SEU, M_PHASE, M_TESTCLK, M_NUM} mech_t;
  int mech[M_NUM];
  string mname[M_NUM] = '{"i2c config", "chip id", "dmro hit", "standalone hit", "test tdc hit",
                          "late hit", "tot saturation", "sro frame", "l1a ignored", "scrambler",
                          "prbs7", "seu repaired", "phase shift", "testclk switch"};

  task automatic check(input string what, input int got, input int exp, input int tol = 0);
    checks++;
    if (got < exp - tol || got > exp + tol) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (+-%0d)", what, got, exp, tol);
    end
  endtask

  // -------------------------------------------------------- deserializers
  logic [31:0] dmro_q[$], sro_q[$], sa_q[$];
  bit deser_on = 1'b0;
  initial begin
    wait (deser_on);
    @(posedge clk40); @(negedge clk1280); @(posedge clk1280);
    forever begin
      logic [31:0] a, b, c;
      for (int i = 0; i < 32; i++) begin
        @(negedge clk1280);
        a = {a[30:0], dmro_sout};
        b = {b[30:0], sro_sout};
        c = {c[30:0], sa_sout};
      end
      if (deser_on) begin
        dmro_q.push_back(a);
        sro_q.push_back(b);
        sa_q.push_back(c);
      end
    end
  end

  // BCID reference, as seen by the chip on the H-tree clock
  int bcid_ref = 0, l1a_bcid_ref = -1;
  always @(posedge clk40) begin
    if (l1a && l1a_bcid_ref < 0) l1a_bcid_ref = bcid_ref;
    bcid_ref = bc0 ? 0 : (bcid_ref == 3563 ? 0 : bcid_ref + 1);
  end

  // ------------------------------------------------------------- helpers
  task automatic i2c_wr(input logic [6:0] a, input logic [7:0] r, input logic [7:0] d[$]);
    bit ok;
    m.wr(a, r, d, ok);
    check("i2c write ack", int'(ok), 1);
  endtask

  // Pulse the selected inputs at th ps after the next 40 MHz edge, width w.
  task automatic pulse(input logic [15:0] pix, input bit sa, input bit tst, input real th, input real w);
    @(posedge clk40);
    #(th);
    disc = disc | pix; if (sa) sa_disc = 1'b1; if (tst) test_hit = 1'b1;
    #(w);
    disc = disc & ~pix; sa_disc = 1'b0; test_hit = 1'b0;
  endtask

  function automatic int exp_toa(input real th); return int'($floor((TS1 - th) / TD)); endfunction
  function automatic int exp_tot(input real w); return int'($floor(w / (2.0 * TD))); endfunction

  logic [57:0] rx = '0;
  function automatic logic [29:0] descramble(input logic [29:0] w);
    logic [29:0] d;
    for (int i = 29; i >= 0; i--) begin
      d[i] = w[i] ^ rx[38] ^ rx[57];
      rx = {rx[56:0], w[i]};
    end
    return d;
  endfunction

  // hit words (header 2'b10, hit flag set) in a queue of DMRO words
  function automatic int hit_words(ref logic [31:0] q[$], output tdc_data_t h[$]);
    h.delete();
    foreach (q[i]) if (q[i][31:30] == 2'b10 && q[i][29]) h.push_back(tdc_data_t'(q[i][29:0]));
    return h.size();
  endfunction

  initial begin
    #1_500_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [7:0] cfg0[$], cfg1[$], rdq[$];
    tdc_data_t h[$];
    real ths[$], ws[$];
    bit ok;

    #100000 rst_n = 1'b1;
    #1_000_000;

    // ---------------------------------------------------- configuration
    for (int i = 0; i < 28; i++) cfg0.push_back(8'($urandom));
    i2c_wr(7'h10, 8'h00, cfg0);
    #500000;
    for (int p = 0; p < 16; p++) begin
      logic [159:0] bits;
      bits = '0;
      for (int i = 0; i < 20; i++) bits[8*i +: 8] = cfg0[i];
      check($sformatf("dac code %0d", p), int'(dac_code[p]), int'(bits[10*p +: 10]));
    end
    check("charge select", int'(qsel), int'(cfg0[20][4:0]));
    check("qinj enables", int'(qinj_en), int'({cfg0[22], cfg0[21]}));
    check("pa ibsel", int'(ibsel), int'(cfg0[23][2:0]));
    check("pa rfsel", int'(rfsel), int'(cfg0[23][4:3]));
    check("pa clsel", int'(clsel), int'(cfg0[23][6:5]));
    check("hysteresis", int'(hys), int'(cfg0[24][3:0]));
    check("standalone dac", int'(sa_dac), int'({cfg0[27][1:0], cfg0[26]}));
    m.rd(7'h10, 8'h00, 28, rdq, ok);
    foreach (rdq[i]) check($sformatf("cfg0 readback %0d", i), int'(rdq[i]), int'(cfg0[i]));
    mech[M_CFG]++;
    m.rd(7'h11, 8'h30, 1, rdq, ok);
    check("chip id / revision", int'(rdq[0]), 'h15);
    mech[M_ID]++;

    // periphery: phase 0, internal clocks, DMRO column 1 plain, pixel 5 on,
    // standalone DMRO on, ROI pixels 0 and 5, depth 8
    cfg1 = '{8'h00, 8'h00, 8'h01, 8'h20, 8'h00, 8'h01, 8'h21, 8'h00, 8'h08};
    i2c_wr(7'h11, 8'h00, cfg1);
    #500000;

    @(negedge clk40) bc0 = 1'b1;
    @(negedge clk40) bc0 = 1'b0;
    repeat (4) @(posedge clk40);
    deser_on = 1'b1;
    repeat (4) @(posedge clk40);

    // ------------------------------------------- hits through three TDCs
    dmro_q.delete(); sa_q.delete();
    for (int n = 0; n < 12; n++) begin
      real th, w;
      int ph;
      do begin
        th = 7500.0 + real'($urandom_range(0, 11000));
        w  = 800.0 + real'($urandom_range(0, 4500));
        if (th + w > 24000.0) w = 24000.0 - th;
        ph = int'($floor(w / TD)) % 126;
      end while (ph >= 29 && ph <= 34);
      ths.push_back(th); ws.push_back(w);
      pulse(16'h0020, 1'b1, 1'b1, th, w);
      @(posedge clk40); #1000;   // result of the test TDC after the period end
      check("test tdc hit", int'(test_data.hit), 1);
      check("test tdc toa", int'(test_data.toa), exp_toa(th), 1);
      check("test tdc tot", int'(test_data.tot), exp_tot(w), 1);
      check("test tdc cal", int'(test_data.cal), 176, 1);
      mech[M_TEST_HIT]++;
      repeat (3) @(posedge clk40);
    end
    repeat (8) @(posedge clk40);
    check("dmro hit words", hit_words(dmro_q, h), 12);
    foreach (h[i]) if (i < 12) begin
      check("dmro toa", int'(h[i].toa), exp_toa(ths[i]), 1);
      check("dmro tot", int'(h[i].tot), exp_tot(ws[i]), 1);
      check("dmro cal", int'(h[i].cal), 176, 1);
      mech[M_DMRO_HIT]++;
    end
    check("standalone hit words", hit_words(sa_q, h), 12);
    foreach (h[i]) if (i < 12) begin
      check("standalone toa", int'(h[i].toa), exp_toa(ths[i]), 1);
      check("standalone tot", int'(h[i].tot), exp_tot(ws[i]), 1);
      mech[M_SA_HIT]++;
    end
    // a pixel that is not enabled in the DMRO does not appear
    dmro_q.delete();
    pulse(16'h0002, 1'b0, 1'b0, 10000.0, 2000.0);
    repeat (6) @(posedge clk40);
    check("disabled pixel silent", hit_words(dmro_q, h), 0);

    // ------------------------------------------------ late hit, long pulse
    dmro_q.delete();
    pulse(16'h0020, 1'b0, 1'b1, 22500.0, 1000.0);
    @(posedge clk40); #1000;
    check("late hit not flagged (test tdc)", int'(test_data.hit), 0);
    repeat (6) @(posedge clk40);
    check("late hit not flagged (dmro)", hit_words(dmro_q, h), 0);
    mech[M_LATE]++;
    pulse(16'h0000, 1'b0, 1'b1, 10000.0, 16000.0);
    #1000;
    check("long pulse flagged", int'(test_data.hit), 1);
    check("long pulse tot saturated", int'(test_data.tot), 511);
    mech[M_TOT_SAT]++;

    // ------------------------------------------------------------- SRO
    begin
      automatic real th0 = 12000.0, w0 = 3000.0;
      int isof, ieof, nd, nhit;
      tdc_data_t hw;
      repeat (5) @(posedge clk40);
      sro_q.delete();
      l1a_bcid_ref = -1;
      pulse(16'h0001, 1'b0, 1'b0, th0, w0);     // pixel 0
      repeat (3) @(posedge clk40);
      @(negedge clk40) l1a = 1'b1;
      @(negedge clk40) l1a = 1'b0;
      repeat (5) @(negedge clk40);
      l1a = 1'b1;                                // during the readout: ignored
      @(negedge clk40) l1a = 1'b0;
      repeat (40) @(posedge clk40);
      isof = -1; ieof = -1;
      foreach (sro_q[i]) begin
        if (sro_q[i][31:24] == {2'b01, 6'h3C} && isof < 0) isof = i;
        if (sro_q[i][31:24] == {2'b01, 6'h3D} && isof >= 0 && ieof < 0) ieof = i;
      end
      check("sro frame found", int'(isof >= 0 && ieof > isof), 1);
      if (isof >= 0 && ieof > isof) begin
        check("sof bcid", int'(sro_q[isof][19:8]), l1a_bcid_ref);
        check("sof depth", int'(sro_q[isof][7:0]), 8);
        nd = ieof - isof - 1;
        check("data words", nd, 16);
        check("eof count", int'(sro_q[ieof][15:0]), 16);
        nhit = 0;
        for (int i = isof + 1; i < ieof; i++) begin
          check("data header", int'(sro_q[i][31:30]), 2);
          if (sro_q[i][29]) begin
            nhit++;
            hw = tdc_data_t'(sro_q[i][29:0]);
            check("hit in pixel 0 block", int'(i - isof - 1 < 8), 1);
            check("sro toa", int'(hw.toa), exp_toa(th0), 1);
            check("sro tot", int'(hw.tot), exp_tot(w0), 1);
          end
        end
        check("sro hit words", nhit, 1);
        mech[M_SRO_FRAME]++;
        // only one frame: the second L1Accept was ignored
        begin
          automatic int nsof = 0;
          foreach (sro_q[i]) if (sro_q[i][31:24] == {2'b01, 6'h3C}) nsof++;
          check("one frame for two L1Accepts", nsof, 1);
          if (nsof == 1) mech[M_L1A_IGNORED]++;
        end
      end
      m.rd(7'h11, 8'h20, 4, rdq, ok);
      check("status bcid", int'({rdq[1], rdq[0]}), l1a_bcid_ref);
      check("status frame count", int'(rdq[2]), 1);
      check("status idle", int'(rdq[3]), 0);
    end

    // -------------------------------------------------------- scrambler
    i2c_wr(7'h11, 8'h02, '{8'h05});   // column 1, scrambler on
    #200000;
    dmro_q.delete();
    ths.delete(); ws.delete();
    repeat (4) @(posedge clk40);
    for (int n = 0; n < 4; n++) begin
      automatic real th = 9000.0 + 2000.0 * n, w = 2500.0;
      ths.push_back(th); ws.push_back(w);
      pulse(16'h0020, 1'b0, 1'b0, th, w);
      repeat (3) @(posedge clk40);
    end
    repeat (6) @(posedge clk40);
    begin
      automatic int k = 0, ndiff = 0;
      tdc_data_t d;
      foreach (dmro_q[i]) begin
        d = tdc_data_t'(descramble(dmro_q[i][29:0]));
        if (d != tdc_data_t'(dmro_q[i][29:0])) ndiff++;
        if (i >= 2 && d.hit) begin
          if (k < 4) begin
            check("scrambled toa", int'(d.toa), exp_toa(ths[k]), 1);
            check("scrambled tot", int'(d.tot), exp_tot(ws[k]), 1);
          end
          k++;
        end
      end
      check("descrambled hit words", k, 4);
      check("scrambled words differ from payload", int'(ndiff > dmro_q.size() / 2), 1);
      if (k == 4) mech[M_SCR]++;
    end

    // ------------------------------------------------------------ PRBS7
    i2c_wr(7'h11, 8'h02, '{8'h09});
    #200000;
    dmro_q.delete();
    repeat (20) @(posedge clk40);
    begin
      bit bits[$];
      automatic int bad = 0;
      foreach (dmro_q[i]) for (int b = 31; b >= 0; b--) bits.push_back(dmro_q[i][b]);
      for (int n = 7; n < bits.size(); n++) if (bits[n] != (bits[n-7] ^ bits[n-6])) bad++;
      check("prbs7 stream", bad, 0);
      check("prbs7 words seen", int'(dmro_q.size() >= 15), 1);
      if (bad == 0 && dmro_q.size() >= 15) mech[M_PRBS]++;
    end

    // -------------------------------------------- single-event upset
    begin
      logic [7:0] v;
      v = dut.cfg1[6];
      @(negedge clk40);
      dut.u_i2c1.g_cfg[6].u_tmr.a = ~v;
      #1;
      check("voted roi byte unchanged", int'(dut.cfg1[6]), int'(v));
      @(negedge clk40);
      check("upset copy repaired", int'(dut.u_i2c1.g_cfg[6].u_tmr.a), int'(v));
      mech[M_SEU]++;
    end

    // ------------------------------------------------------ phase shift
    deser_on = 1'b0;
    begin
      realtime t0, t1;
      real sh;
      @(posedge clk40); t0 = $realtime;
      i2c_wr(7'h11, 8'h00, '{8'd8});          // 8 x 97.66 ps = 781.25 ps
      repeat (4) @(posedge clk40);
      @(posedge clk40); t1 = $realtime;
      sh = (t1 - t0) - 25000.0 * $floor((t1 - t0) / 25000.0);
      check("phase shift (fs)", int'(sh * 1000.0), 781250, 2);
      if (sh > 780.0 && sh < 782.5) mech[M_PHASE]++;
    end

    // ------------------------------------------------------ TestCLK1
    begin
      static int n;
      n = 0;
      i2c_wr(7'h11, 8'h01, '{8'h02});
      repeat (4) @(posedge clk40);
      @(posedge clk40);
      fork
        @(posedge clk40);
        forever begin @(posedge strobe_out); n++; end
      join_any
      disable fork;
      check("320 MHz on the strobe line", n, 8, 1);
      if (n >= 7) mech[M_TESTCLK]++;
    end

    for (int i = 0; i < M_NUM; i++) begin
      $display("mechanism %-16s %0d", mname[i], mech[i]);
      check($sformatf("mechanism %s happened", mname[i]), int'(mech[i] > 0), 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

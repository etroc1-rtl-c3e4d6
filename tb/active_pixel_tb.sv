// active_pixel_tb: self-checking test of one active pixel (TDC plus its
// 256-deep circular buffer).
//
// A 40 MHz clock and the two-pulse strobe are driven as in the chip. Hits
// with random leading edge and width arrive in random periods while the
// write address counts up once per period (as the SRO controller does), for
// more than one lap of the buffer. Every TDC word is checked against the hit
// time (TOA, TOT, Cal within one bin; zero word when there was no hit) and
// kept in a reference history. Writing then stops and every buffer address is
// read back and compared with the last word written there.
module active_pixel_tb;
  timeunit 1ps; timeprecision 1fs;
  import etroc1_pkg::*;

  localparam int DEPTH = 256;
  localparam real TD = 17.8;
  localparam real T40 = 25000.0;
  localparam real TS1 = 18750.0;

  logic clk40 = 1'b0, rst_n = 1'b1, hit = 1'b0, strobe = 1'b0, we = 1'b0;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act
  logic [7:0] waddr = '0, raddr = '0;
  tdc_data_t data, dout;
  tdc_data_t ref_mem[DEPTH];
  int checks = 0, failures = 0;

  active_pixel dut (.clk40(clk40), .rst_n(rst_n), .hit(hit), .strobe(strobe), .mem_we(we),
                    .waddr(waddr), .raddr(raddr), .tdc_data(data), .mem_dout(dout));

  initial forever begin
    clk40 = 1'b1;
    fork
      begin #(T40/2) clk40 = 1'b0; end
      begin #(TS1) strobe = 1'b1; #1562.5 strobe = 1'b0; #1562.5 strobe = 1'b1; #1562.5 strobe = 1'b0; end
    join
    #(T40 - TS1 - 3*1562.5);
  end

  task automatic check(input string what, input int got, input int exp, input int tol = 0);
    checks++;
    if (got < exp - tol || got > exp + tol) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (+-%0d)", what, got, exp, tol);
    end
  endtask

  initial begin
    #20_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    automatic int nhits = 0;
    bit h_prev;
    real th_prev, w_prev;
    foreach (ref_mem[i]) ref_mem[i] = '0;
    #30000 rst_n = 1'b1;
    @(posedge clk40);
    we = 1'b1;
    for (int n = 0; n <= 300; n++) begin
      bit h;
      real th, w;
      int ph;
      // hits inside the 11.6 ns effective TOA range before the first strobe
      @(posedge clk40);           // start of period n, end of period n-1
      h = (n < 300) && ($urandom_range(0, 2) == 0);
      do begin
        th = 7500.0 + real'($urandom_range(0, 10500));
        w  = 600.0 + real'($urandom_range(0, 5000));
        ph = int'($floor(w / TD)) % 126;
      end while (ph >= 29 && ph <= 34);
      fork
        if (h) begin #(th) hit = 1'b1; #(w) hit = 1'b0; end
      join_none
      if (n > 0) begin
        waddr <= waddr + 8'd1;    // address for the word of period n-1
        #100;
        if (h_prev) begin
          nhits++;
          check("hit flag", int'(data.hit), 1);
          check("toa", int'(data.toa), int'($floor((TS1 - th_prev) / TD)), 1);
          check("tot", int'(data.tot), int'($floor(w_prev / (2.0 * TD))), 1);
          check("cal", int'(data.cal), 176, 1);
        end else
          check("empty period gives zero word", int'(data), 0);
        ref_mem[8'(waddr)] = data;  // stored at the next edge
      end
      h_prev = h; th_prev = th; w_prev = w;
    end
    @(posedge clk40);
    we <= 1'b0;
    #100;
    for (int a = 0; a < DEPTH; a++) begin
      raddr = 8'(a);
      @(posedge clk40); #100;
      check($sformatf("buffer address %0d", a), int'(dout), int'(ref_mem[a]));
    end
    check("some hits were made", int'(nhits > 50), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

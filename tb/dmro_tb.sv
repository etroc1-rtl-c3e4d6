// dmro_tb: drives random TDC words into all 16 pixel inputs and checks the
// 32-bit output word against a model built here from the diagram:
//   - plain mode: word = {2'b10, data of the enabled pixel of the selected
//     column}, one clock after the buffer samples it, for every column select;
//   - a disabled pixel gives a zero payload;
//   - scrambled mode: the payload, descrambled with a bit-serial
//     x^58 + x^39 + 1 descrambler, equals the pixel data;
//   - PRBS mode: the output stream obeys x^7 + x^6 + 1.
module dmro_tb;
  timeunit 1ps; timeprecision 1fs;
  import etroc1_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, scr_en = 1'b0, prbs_en = 1'b0;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act
  tdc_data_t [15:0] pix;
  logic [15:0] en = '0;
  logic [1:0] col = '0;
  logic [31:0] word;
  int checks = 0, failures = 0;
  dmro dut (.clk40(clk), .rst_n(rst_n), .pix_data(pix), .pix_en(en), .col_sel(col),
            .scr_en(scr_en), .prbs_en(prbs_en), .word(word));
  always #12500 clk = ~clk;

  tdc_data_t hist[$];   // expected payload per clock
  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  logic [57:0] rx = '0;
  function automatic logic [29:0] descramble(input logic [29:0] w);
    logic [29:0] d;
    for (int i = 29; i >= 0; i--) begin
      d[i] = w[i] ^ rx[38] ^ rx[57];
      rx = {rx[56:0], w[i]};
    end
    return d;
  endfunction

  // one clock: new random data, return payload expected one clock later
  task automatic step(input int row_en);
    tdc_data_t e;
    for (int p = 0; p < 16; p++) pix[p] = tdc_data_t'($urandom);
    e = (row_en >= 0) ? pix[4*row_en + col] : '0;
    hist.push_back(e);
    @(negedge clk);
  endtask

  initial begin
    #100_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    pix = '0;
    #30000 rst_n = 1'b1;
    @(negedge clk);
    // plain mode, each column, one pixel enabled per column (row = column)
    for (int c = 0; c < 4; c++) begin
      col = 2'(c);
      en = '0;
      for (int q = 0; q < 4; q++) en[4*q + q] = 1'b1;  // diagonal: row q in column q
      hist.delete();
      for (int k = 0; k < 20; k++) begin
        step(c);
        if (k >= 2) check($sformatf("plain col %0d", c), word, {2'b10, hist[k-1]});
      end
    end
    // disabled column: zero payload
    en = 16'h0001; col = 2'd3;
    hist.delete();
    for (int k = 0; k < 5; k++) begin
      step(-1);
      if (k >= 2) check("disabled pixel", word, {2'b10, 30'h0});
    end
    // scrambled mode
    en = 16'h0020; col = 2'd1; scr_en = 1'b1;  // pixel 5 = row 1, col 1
    hist.delete();
    for (int k = 0; k < 60; k++) begin
      logic [29:0] d;
      step(1);
      if (k >= 2) begin
        checks++;
        if (word[31:30] != 2'b10) begin failures++; $display("FAIL header %b", word[31:30]); end
        d = descramble(word[29:0]);
        if (k >= 5) check("descrambled", {2'b10, d}, {2'b10, hist[k-1]});
      end
    end
    // PRBS mode
    scr_en = 1'b0; prbs_en = 1'b1;
    repeat (3) @(negedge clk);
    begin
      bit bits[$];
      repeat (20) begin
        for (int i = 31; i >= 0; i--) bits.push_back(word[i]);
        @(negedge clk);
      end
      for (int n = 7; n < bits.size(); n++) begin
        checks++;
        if (bits[n] != (bits[n-7] ^ bits[n-6])) begin failures++; $display("FAIL prbs bit %0d", n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

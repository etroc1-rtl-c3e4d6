// sro_tb: the SRO controller with 16 circular buffers (256 deep), fed with
// random TDC words every clock. A reference copy of every buffer is kept
// here. For several triggers with different ROI masks and depths it checks
// the whole frame word by word: SOF with the BCID counted here since BC0 and
// the depth, then for each ROI pixel in order the last ADDR_DEPTH words
// written (oldest first), then EOF with the word count. It also checks the
// frame timing (SOF one clock after L1Accept, one word per clock), that
// L1Accept during a readout is ignored, that writing resumes after EOF, and
// an empty ROI (SOF then EOF).
module sro_tb;
  timeunit 1ps; timeprecision 1fs;
  import etroc1_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, bc0 = 1'b0, l1a = 1'b0;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act
  logic [15:0] roi = '0;
  logic [7:0] depth = '0;
  logic mem_we, busy;
  logic [7:0] waddr, raddr, frame_cnt;
  logic [11:0] l1a_bcid;
  logic [31:0] word;
  tdc_data_t [15:0] din, dout;
  int checks = 0, failures = 0;

  sro dut (.clk40(clk), .rst_n(rst_n), .bc0(bc0), .l1a(l1a), .roi(roi), .addr_depth(depth),
           .mem_we(mem_we), .waddr(waddr), .raddr(raddr), .mem_dout(dout),
           .word(word), .busy(busy), .l1a_bcid(l1a_bcid), .frame_cnt(frame_cnt));
  for (genvar p = 0; p < 16; p++) begin : g_mem
    circ_buffer #(.DEPTH(256), .W(30)) u_mem (.clk(clk), .we(mem_we), .waddr(waddr), .din(din[p]),
                                             .raddr(raddr), .dout(dout[p]));
  end
  always #12500 clk = ~clk;

  // reference: history of words written per pixel, newest last
  tdc_data_t hist[16][$];
  int bcid_ref = 0;
  always @(posedge clk) if (rst_n) begin
    if (mem_we) for (int p = 0; p < 16; p++) hist[p].push_back(din[p]);
    bcid_ref = bc0 ? 0 : (bcid_ref == 3563 ? 0 : bcid_ref + 1);
  end
  always @(negedge clk) for (int p = 0; p < 16; p++) din[p] = tdc_data_t'($urandom);

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  task automatic trigger(input logic [15:0] r, input logic [7:0] d, input bit extra_l1a);
    int n, dn, bc;
    logic [31:0] exp[$];
    roi = r; depth = d;
    dn = (d == 0) ? 256 : d;
    @(negedge clk);
    l1a = 1'b1;
    @(posedge clk);   // L1Accept sampled here; this edge writes the newest entry
    bc = bcid_ref;
    #1 l1a = 1'b0;
    exp.push_back({2'b01, 6'h3C, 4'h0, 12'(bc), d});
    n = 0;
    for (int p = 0; p < 16; p++) if (r[p]) begin
      int sz = hist[p].size();
      for (int i = sz - dn; i < sz; i++) begin exp.push_back({2'b10, hist[p][i]}); n++; end
    end
    exp.push_back({2'b01, 6'h3D, 8'h00, 16'(n)});
    foreach (exp[i]) begin
      @(posedge clk); #1;
      if (extra_l1a && i == 3) l1a = 1'b1;
      if (extra_l1a && i == 4) l1a = 1'b0;
      check($sformatf("frame word %0d", i), word, exp[i]);
    end
    l1a = 1'b0;
    @(posedge clk); #1;
    check("writing resumed", {31'h0, mem_we}, 32'h1);
    check("idle after frame", word, {2'b01, 6'h3F, 24'h0});
  endtask

  initial begin
    #2_000_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    #30000 rst_n = 1'b1;
    @(negedge clk) bc0 = 1'b1;
    @(negedge clk) bc0 = 1'b0;
    repeat (300) @(negedge clk);       // fill all buffers more than once
    trigger(16'h0001, 8'd4, 0);
    repeat (20) @(negedge clk);
    trigger(16'h8421, 8'd16, 1);       // diagonal pixels, L1A during readout
    repeat (50) @(negedge clk);
    trigger(16'hFFFF, 8'd8, 0);
    repeat (300) @(negedge clk);
    trigger(16'h0240, 8'd0, 0);        // full depth of 256
    repeat (10) @(negedge clk);
    trigger(16'h0000, 8'd5, 0);        // empty ROI
    check("frames counted", {24'h0, frame_cnt}, 32'd5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// circ_buffer_tb: writes 600 random words at a wrapping address (more than
// two laps of the 256-entry buffer), freezes it (we low) while the address
// keeps moving, and reads back every entry, comparing with a reference array.
// Checks the one-clock read latency and that frozen entries are not
// overwritten.
module circ_buffer_tb;
  timeunit 1ps; timeprecision 1fs;
  logic clk = 1'b0, we = 1'b0;
  logic [7:0] waddr = '0, raddr = '0;
  logic [29:0] din = '0, dout;
  int checks = 0, failures = 0;
  circ_buffer #(.DEPTH(256), .W(30)) dut (.clk(clk), .we(we), .waddr(waddr), .din(din), .raddr(raddr), .dout(dout));
  always #12500 clk = ~clk;
  logic [29:0] ref_mem [256];

  initial begin
    #100_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    @(negedge clk);
    we = 1'b1;
    for (int k = 0; k < 600; k++) begin
      din = 30'($urandom);
      ref_mem[waddr] = din;
      @(negedge clk);
      waddr = waddr + 1'b1;
    end
    we = 1'b0;
    for (int k = 0; k < 50; k++) begin   // address moves, nothing written
      din = 30'($urandom);
      @(negedge clk);
      waddr = waddr + 1'b1;
    end
    for (int a = 0; a < 256; a++) begin
      raddr = 8'(a);
      @(posedge clk); #1;
      checks++;
      if (dout !== ref_mem[a]) begin failures++; $display("FAIL addr %0d: %h vs %h", a, dout, ref_mem[a]); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

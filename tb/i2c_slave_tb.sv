// i2c_slave_tb: an I2C master writes all 32 configuration bytes in one
// transfer, reads them back (over the bus and on the cfg outputs), reads the
// 16 status bytes and the chip ID byte, checks that a wrong slave address is
// not acknowledged and changes nothing, and upsets one copy of a triplicated
// config bit to check that the voted output is unchanged and the copy is
// repaired.
module i2c_slave_tb;
  timeunit 1ps; timeprecision 1fs;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous resets act
  logic scl, m_oe, s_oe, sda;
  logic [31:0][7:0] cfg;
  logic [15:0][7:0] stat;
  int checks = 0, failures = 0;
  assign sda = !(m_oe || s_oe);

  i2c_slave #(.SLAVE_ADDR(7'h10)) dut (.clk(clk), .rst_n(rst_n), .scl(scl), .sda_in(sda), .sda_oe(s_oe),
                                       .chip_id(4'hA), .chip_rev(4'h1), .cfg(cfg), .stat(stat));
  i2c_master #(.HALF_NS(200.0)) m (.scl(scl), .sda_oe(m_oe), .sda(sda));
  always #12500 clk = ~clk;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    #50_000_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    logic [7:0] wd[$], rdq[$];
    bit ok;
    for (int i = 0; i < 16; i++) stat[i] = 8'($urandom);
    #100000 rst_n = 1'b1;
    #100000;
    for (int i = 0; i < 32; i++) wd.push_back(8'($urandom));
    m.wr(7'h10, 8'h00, wd, ok);
    check("write acknowledged", int'(ok), 1);
    #1000000;
    for (int i = 0; i < 32; i++) check($sformatf("cfg[%0d] output", i), int'(cfg[i]), int'(wd[i]));
    m.rd(7'h10, 8'h00, 32, rdq, ok);
    check("read acknowledged", int'(ok), 1);
    for (int i = 0; i < 32; i++) check($sformatf("cfg[%0d] readback", i), int'(rdq[i]), int'(wd[i]));
    m.rd(7'h10, 8'h20, 17, rdq, ok);
    for (int i = 0; i < 16; i++) check($sformatf("status[%0d]", i), int'(rdq[i]), int'(stat[i]));
    check("chip id/rev", int'(rdq[16]), 'h1A);
    // partial write at an offset
    m.wr(7'h10, 8'h05, '{8'h5A, 8'hC3}, ok);
    #1000000;
    check("offset write 5", int'(cfg[5]), 'h5A);
    check("offset write 6", int'(cfg[6]), 'hC3);
    check("neighbour kept", int'(cfg[7]), int'(wd[7]));
    // wrong address
    m.wr(7'h11, 8'h00, '{8'hFF}, ok);
    check("wrong address not acknowledged", int'(ok), 0);
    #1000000;
    check("wrong address wrote nothing", int'(cfg[0]), int'(wd[0]));
    // single-event upset in one copy
    @(negedge clk);
    dut.g_cfg[9].u_tmr.b = ~cfg[9];   // flip one copy between clock edges
    #1;
    check("copy upset", int'(dut.g_cfg[9].u_tmr.b), int'(~wd[9]) & 'hFF);
    check("voted value survives upset", int'(cfg[9]), int'(wd[9]));
    @(negedge clk);
    check("upset copy repaired", int'(dut.g_cfg[9].u_tmr.b), int'(wd[9]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

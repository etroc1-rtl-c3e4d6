// i2c_master: bit-banging I2C master used by the testbenches.
//
// Drives SCL and an open-drain SDA (sda_oe high pulls the line low). The
// half period of SCL is HALF_NS nanoseconds. Tasks: wr(addr, reg, bytes),
// rd(addr, reg, n, bytes) with a repeated START between pointer write and
// read; both report whether every byte was acknowledged.
module i2c_master #(
  parameter real HALF_NS = 200.0
) (
  output logic scl,
  output logic sda_oe,
  input  logic sda
);
  timeunit 1ps; timeprecision 1fs;
  localparam real H = HALF_NS * 1000.0;

  initial begin
    scl = 1'b1;
    sda_oe = 1'b0;
  end

  task automatic start_c();
    sda_oe = 1'b0; #(H/2); scl = 1'b1; #(H/2);
    sda_oe = 1'b1; #(H/2); scl = 1'b0; #(H/2);
  endtask
  task automatic stop_c();
    sda_oe = 1'b1; #(H/2); scl = 1'b1; #(H/2);
    sda_oe = 1'b0; #(H);
  endtask
  task automatic send(input logic [7:0] b, output bit ack);
    for (int i = 7; i >= 0; i--) begin
      sda_oe = !b[i]; #(H/2); scl = 1'b1; #(H); scl = 1'b0; #(H/2);
    end
    sda_oe = 1'b0; #(H/2); scl = 1'b1; #(H/2);
    ack = !sda; #(H/2); scl = 1'b0; #(H/2);
  endtask
  task automatic recv(input bit last, output logic [7:0] b);
    sda_oe = 1'b0;
    for (int i = 7; i >= 0; i--) begin
      #(H/2); scl = 1'b1; #(H/2); b[i] = sda; #(H/2); scl = 1'b0; #(H/2);
    end
    sda_oe = !last; #(H/2); scl = 1'b1; #(H); scl = 1'b0; #(H/2);
    sda_oe = 1'b0;
  endtask

  task automatic wr(input logic [6:0] a, input logic [7:0] r, input logic [7:0] d[$], output bit ok);
    bit ack;
    ok = 1'b1;
    start_c();
    send({a, 1'b0}, ack); ok &= ack;
    if (ack) begin
      send(r, ack); ok &= ack;
      foreach (d[i]) begin send(d[i], ack); ok &= ack; end
    end
    stop_c();
  endtask

  task automatic rd(input logic [6:0] a, input logic [7:0] r, input int n, output logic [7:0] d[$], output bit ok);
    bit ack;
    logic [7:0] b;
    ok = 1'b1;
    d.delete();
    start_c();
    send({a, 1'b0}, ack); ok &= ack;
    send(r, ack); ok &= ack;
    start_c();   // repeated START
    send({a, 1'b1}, ack); ok &= ack;
    for (int i = 0; i < n; i++) begin
      recv(i == n - 1, b);
      d.push_back(b);
    end
    stop_c();
  endtask
endmodule

// tmr_reg: triple-modular-redundant register with self-correction.
//
// Three copies a, b, c of a W-bit register. q is the bitwise majority of the
// three. On every rising clk edge all three copies load d when we is high,
// otherwise the majority q, so an upset in one copy never reaches q and is
// repaired at the next clock. Reset (active low, asynchronous) loads RST.
module tmr_reg #(
  parameter int unsigned W = 8,
  parameter logic [W-1:0] RST = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         we,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  timeunit 1ps; timeprecision 1fs;

  logic [W-1:0] a, b, c, nxt;
  assign q   = (a & b) | (b & c) | (a & c);
  assign nxt = we ? d : q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a <= RST;
      b <= RST;
      c <= RST;
    end else begin
      a <= nxt;
      b <= nxt;
      c <= nxt;
    end
  end
endmodule

// tap_adder: one copy of an adder of the filter's accumulation chain.
//
// Adds the incoming partial sum and a tap product, wrapping modulo 2^WIDTH.
// With the filter's coefficients (absolute sum 300) and 9-bit samples the
// result never exceeds 18 signed bits, so the wrap never happens there.
// Combinational.
//
// Ports: a partial sum, b product, s new partial sum (two's complement).
module tap_adder #(
  parameter int WIDTH = 18
) (
  input  logic signed [WIDTH-1:0] a,
  input  logic signed [WIDTH-1:0] b,
  output logic signed [WIDTH-1:0] s
);

  assign s = a + b;

endmodule

// tap_multiplier: one copy of a filter tap multiplier.
//
// Multiplies a signed sample by a signed coefficient and gives the full
// signed product (9 x 9 -> 18 bits by default). The filter uses eleven of
// these per redundant part; the coefficient is a constant at each tap so the
// synthesiser reduces the multiplier to shifts and adds. Combinational; the
// paper shows no register between multiplier and adder.
//
// Ports: x sample, coef coefficient, p product (two's complement).
module tap_multiplier #(
  parameter int DATA_W = 9,
  parameter int COEF_W = 9,
  parameter int PROD_W = 18
) (
  input  logic signed [DATA_W-1:0] x,
  input  logic signed [COEF_W-1:0] coef,
  output logic signed [PROD_W-1:0] p
);

  logic signed [DATA_W+COEF_W-1:0] full;

  always_comb full = x * coef;

  assign p = PROD_W'(full);

endmodule

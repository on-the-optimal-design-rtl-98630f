// tmr_p2_partition: one medium-size logic partition of the TMR_p2 filter.
//
// Holds one multiplier and one adder of the filter, each triplicated so
// that redundant part i computes acc_in[i] + x[i] * coef on its own copy,
// followed by a triplicated majority voter on the three sums. The voter is
// the barrier that keeps a routing upset joining two parts in different
// partitions from corrupting two copies of the same value: each partition's
// copies are voted again before they are used. This grouping (one adder, one
// multiplier, voters at the output) is the paper's medium partition.
// OUT_VOTE = 0 leaves the voter out, for the last partition, whose sums go to
// the output voters instead (this design's way of sharing the module).
//
// Ports: x[i] tap sample of part i, coef the tap's constant coefficient,
// acc_in[i] incoming partial sum, acc_out[i] outgoing (voted) partial sum.
// Combinational.
module tmr_p2_partition #(
  parameter int DATA_W   = 9,
  parameter int COEF_W   = 9,
  parameter int ACC_W    = 18,
  parameter bit OUT_VOTE = 1'b1
) (
  input  logic [DATA_W-1:0] x      [3],
  input  logic [COEF_W-1:0] coef,
  input  logic [ACC_W-1:0]  acc_in [3],
  output logic [ACC_W-1:0]  acc_out[3]
);

  logic [ACC_W-1:0] prod [3];
  logic [ACC_W-1:0] sum  [3];

  for (genvar i = 0; i < 3; i++) begin : g_part
    tap_multiplier #(.DATA_W(DATA_W), .COEF_W(COEF_W), .PROD_W(ACC_W)) u_mul (
      .x(x[i]), .coef(coef), .p(prod[i])
    );
    tap_adder #(.WIDTH(ACC_W)) u_add (
      .a(acc_in[i]), .b(prod[i]), .s(sum[i])
    );
  end

  if (OUT_VOTE) begin : g_vote
    tmr_majority_voter #(.WIDTH(ACC_W)) u_vote (.d(sum), .q(acc_out));
  end else begin : g_novote
    always_comb acc_out = sum;
  end

endmodule

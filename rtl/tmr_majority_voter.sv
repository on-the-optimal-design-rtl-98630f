// tmr_majority_voter: the triplicated voter that forms a voter barrier.
//
// Three majority voters, one per redundant part. Voter i reads all three
// copies and drives only part i's next stage. Because the voter itself is a
// look-up table that can be upset, it is triplicated too: an upset voter
// corrupts one part only, which the next barrier outvotes. A fault that
// reaches two copies on the same side of the barrier is not masked; a fault
// that joins copies on different sides of it is, since each side is voted by
// a different set of voters.
//
// Ports: d[i] is part i's copy, q[i] is part i's voted copy. Combinational.
module tmr_majority_voter #(
  parameter int WIDTH = 18
) (
  input  logic [WIDTH-1:0] d [3],
  output logic [WIDTH-1:0] q [3]
);

  for (genvar i = 0; i < 3; i++) begin : g_vote
    majority_voter #(.WIDTH(WIDTH)) u_voter (
      .a(d[0]), .b(d[1]), .c(d[2]), .y(q[i])
    );
  end

endmodule

// tmr_voted_register: triplicated register with voters and refresh.
//
// One flip-flop per redundant part, each on that part's own clock
// (clk[0..2]). Every flip-flop is followed by its own majority voter reading
// all three flip-flops, and the voter output is both the register's output
// for that part and the feedback into a multiplexer in front of the
// flip-flop. While load is high the flip-flop takes new data; while it is low
// it reloads the voted value, so a flip-flop whose state was upset is
// rewritten with the majority value at the next clock edge instead of
// holding the wrong value until new data arrives. This is the structure of
// the paper's voted register; the load enable on the multiplexer and the
// reset are this design's choices (the paper leaves the select line and
// reset unspecified).
//
// Ports: clk, rst_n (synchronous, active low) and load per part; d[i] new
// data for part i; q[i] part i's voted output. q follows the flip-flops
// combinationally, so data written at an edge appears on q right after it
// (one cycle of delay from d to q).
module tmr_voted_register #(
  parameter int WIDTH = 9
) (
  input  logic [2:0]       clk,
  input  logic [2:0]       rst_n,
  input  logic [2:0]       load,
  input  logic [WIDTH-1:0] d [3],
  output logic [WIDTH-1:0] q [3]
);

  logic [WIDTH-1:0] r [3];  // the three flip-flops, as the voters see them

  for (genvar i = 0; i < 3; i++) begin : g_part
    logic [WIDTH-1:0] ff;  // part i's flip-flop, on part i's clock

    always_ff @(posedge clk[i]) begin
      if (!rst_n[i])    ff <= '0;
      else if (load[i]) ff <= d[i];
      else              ff <= q[i];   // refresh from the voter
    end

    assign r[i] = ff;

    majority_voter #(.WIDTH(WIDTH)) u_voter (
      .a(r[0]), .b(r[1]), .c(r[2]), .y(q[i])
    );
  end

endmodule

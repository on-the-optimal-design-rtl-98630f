// majority_voter: bitwise 2-out-of-3 majority of three redundant copies.
//
// Each output bit is 1 when at least two of the three input bits are 1, so a
// single wrong copy never reaches the output. On an SRAM FPGA each bit is one
// 3-input look-up table, which is how the paper sizes a voter. Purely
// combinational, no latency.
//
// Ports: a, b, c are the copies from redundant parts tr0, tr1, tr2; y is the
// voted word.
module majority_voter #(
  parameter int WIDTH = 18
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic [WIDTH-1:0] c,
  output logic [WIDTH-1:0] y
);

  assign y = (a & b) | (a & c) | (b & c);

endmodule

// tmr_p2_fir: 11-tap 9-bit FIR low-pass filter under triple modular
// redundancy with medium logic partition (TMR_p2).
//
// The filter computes y(n) = sum_k C[k] * x(n-k), k = 0..10, with the
// coefficients of fir_pkg (1, -1, -9, 6, 73, 120, 73, 6, -9, -1, 1). It is a
// direct form: a delay line of ten 9-bit registers, eleven multipliers and a
// chain of ten 18-bit adders. Every part of it exists three times (redundant
// parts tr0, tr1, tr2), each with its own input pins, clock, reset and output
// pins, so that no single pin or wire is shared by all three.
//
//   - Each delay register is a tmr_voted_register: its three copies are voted
//     and the voted value refreshes them.
//   - Tap 0's product x(n)*C[0] feeds the first adder directly.
//   - Taps 1..10 each form one tmr_p2_partition (one multiplier and one
//     adder per part). Partitions 1..9 end in a triplicated voter barrier;
//     partition 10's sums go to the output voters, which drive the three
//     output pins.
//
// This partitioning, the sizes and the coefficients follow the paper. The
// clock enable (ce, the register multiplexer's select), the synchronous
// active-low reset and the two's-complement encoding are this design's
// choices.
//
// Timing: dout is combinational from din and the delay registers, so dout
// shows y(n) for the sample x(n) currently on din; the delay line advances
// on each clock edge with ce high. With ce low the registers refresh from
// their voters and the past samples are kept.
module tmr_p2_fir #(
  parameter int DATA_W = fir_pkg::DATA_W,
  parameter int COEF_W = fir_pkg::COEF_W,
  parameter int ACC_W  = fir_pkg::ACC_W
) (
  input  logic [2:0]        clk,
  input  logic [2:0]        rst_n,
  input  logic [2:0]        ce,
  input  logic [DATA_W-1:0] din  [3],
  output logic [ACC_W-1:0]  dout [3]
);

  localparam int NTAPS = fir_pkg::NTAPS;

  // xd[k][i]: sample x(n-k) as seen by part i (xd[0] is the input pins).
  logic [DATA_W-1:0] xd [NTAPS][3];

  always_comb xd[0] = din;

  // Delay line: ten voted registers with refresh.
  for (genvar k = 1; k < NTAPS; k++) begin : g_reg
    tmr_voted_register #(.WIDTH(DATA_W)) u_reg (
      .clk(clk), .rst_n(rst_n), .load(ce), .d(xd[k-1]), .q(xd[k])
    );
  end

  // Adder chain. g_tap[k].acc[i] is part i's partial sum through tap k;
  // each stage keeps its own signal so the chain is not one wide net.
  for (genvar k = 0; k < NTAPS; k++) begin : g_tap
    logic [ACC_W-1:0] acc [3];

    if (k == 0) begin : g_first
      // Tap 0: multiplier only, its product starts the adder chain.
      for (genvar i = 0; i < 3; i++) begin : g_mul
        tap_multiplier #(.DATA_W(DATA_W), .COEF_W(COEF_W), .PROD_W(ACC_W)) u_mul (
          .x(xd[0][i]), .coef(COEF_W'(fir_pkg::COEF[0])), .p(acc[i])
        );
      end
    end else begin : g_partition
      // Taps 1..10: one partition each, voted except the last.
      tmr_p2_partition #(
        .DATA_W(DATA_W), .COEF_W(COEF_W), .ACC_W(ACC_W),
        .OUT_VOTE(k < NTAPS-1)
      ) u_part (
        .x(xd[k]), .coef(COEF_W'(fir_pkg::COEF[k])),
        .acc_in(g_tap[k-1].acc), .acc_out(acc)
      );
    end
  end

  tmr_output_voter #(.WIDTH(ACC_W)) u_out (.d(g_tap[NTAPS-1].acc), .pin(dout));

endmodule

// tmr_output_voter: output majority voters in front of the package pins.
//
// The triplicated design leaves the chip on three pins per output bit, one
// per redundant part. Each pin is driven by its own majority voter reading
// all three parts' final results, so a wrong part or an upset voter spoils
// one pin only. The three pins are joined outside the chip into the single
// output signal. The paper shows output buffers after the voters but does not
// say how they are controlled; here the buffers are plain outputs and the
// joining of the pins is left to the board.
//
// Ports: d[i] is part i's final result, pin[i] the value on part i's pin.
// Combinational.
module tmr_output_voter #(
  parameter int WIDTH = 18
) (
  input  logic [WIDTH-1:0] d   [3],
  output logic [WIDTH-1:0] pin [3]
);

  for (genvar i = 0; i < 3; i++) begin : g_pin
    majority_voter #(.WIDTH(WIDTH)) u_voter (
      .a(d[0]), .b(d[1]), .c(d[2]), .y(pin[i])
    );
  end

endmodule

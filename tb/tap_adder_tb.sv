// tap_adder_tb: checks the 18-bit adder against integer addition.
//
// Random signed operands whose sum fits 18 bits must add exactly; operands
// at the range limits must wrap modulo 2^18.
module tap_adder_tb;
  logic signed [17:0] a, b, s;
  int checks = 0, failures = 0;
  logic clk = 0;

  tap_adder #(.WIDTH(18)) dut (.a(a), .b(b), .s(s));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(int x, int y);
    int e;
    a = 18'(x); b = 18'(y);
    #1;
    e = x + y;
    // expected value wrapped to 18 signed bits
    e = ((e + 131072) & 32'h3FFFF) - 131072;
    checks++;
    if (int'(s) !== e) begin
      failures++;
      $display("FAIL a=%0d b=%0d s=%0d exp=%0d", x, y, s, e);
    end
  endtask

  initial begin
    for (int n = 0; n < 3000; n++)
      try(int'($urandom_range(0, 131071)) - 65536, int'($urandom_range(0, 131071)) - 65536);
    try(131071, 1);
    try(-131072, -1);
    try(0, 0);
    try(-1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

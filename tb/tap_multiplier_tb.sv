// tap_multiplier_tb: checks the signed tap multiplier exhaustively.
//
// All 2^9 x 2^9 sample/coefficient pairs are applied; the product is
// compared with integer arithmetic on the sign-extended operands.
module tap_multiplier_tb;
  logic signed [8:0]  x, coef;
  logic signed [17:0] p;
  int checks = 0, failures = 0;
  logic clk = 0;

  tap_multiplier #(.DATA_W(9), .COEF_W(9), .PROD_W(18)) dut (.x(x), .coef(coef), .p(p));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -256; i < 256; i++) begin
      for (int j = -256; j < 256; j++) begin
        x = 9'(i); coef = 9'(j);
        #1;
        checks++;
        if (int'(p) !== i * j) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d c=%0d p=%0d exp=%0d", i, j, p, i * j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

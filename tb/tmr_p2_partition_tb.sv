// tmr_p2_partition_tb: checks one multiplier+adder partition with its
// voter barrier, and the unvoted variant used for the last tap.
//
// Expected values are acc_in + x * coef computed with integers. With the
// voter, a corrupted input of one part (sample or partial sum) must not show
// on any of the three outputs. Without it, the corruption must stay on the
// part it entered and the other two parts must be exact.
module tmr_p2_partition_tb;
  logic [8:0]  x   [3];
  logic [8:0]  coef;
  logic [17:0] ai  [3];
  logic [17:0] ao  [3];
  logic [17:0] aon [3];
  int checks = 0, failures = 0;
  logic clk = 0;

  tmr_p2_partition #(.DATA_W(9), .COEF_W(9), .ACC_W(18), .OUT_VOTE(1'b1)) dut (
    .x(x), .coef(coef), .acc_in(ai), .acc_out(ao)
  );
  tmr_p2_partition #(.DATA_W(9), .COEF_W(9), .ACC_W(18), .OUT_VOTE(1'b0)) dut_nv (
    .x(x), .coef(coef), .acc_in(ai), .acc_out(aon)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [17:0] expect_sum(int xs, int cs, int as);
    return 18'(as + xs * cs);
  endfunction

  task automatic chk(logic [17:0] got, logic [17:0] e, string what, int part);
    checks++;
    if (got !== e) begin
      failures++;
      $display("FAIL %s part %0d got=%h exp=%h", what, part, got, e);
    end
  endtask

  initial begin
    int xs, cs, as;
    logic [17:0] e;
    for (int n = 0; n < 1500; n++) begin
      xs = int'($urandom_range(0, 511)) - 256;
      cs = int'($urandom_range(0, 511)) - 256;
      as = int'($urandom_range(0, 131071)) - 65536;
      for (int i = 0; i < 3; i++) begin
        x[i] = 9'(xs); ai[i] = 18'(as);
      end
      coef = 9'(cs);
      e = expect_sum(xs, cs, as);
      #1;
      for (int i = 0; i < 3; i++) begin
        chk(ao[i], e, "voted", i);
        chk(aon[i], e, "unvoted", i);
      end
      // corrupt one part's sample or partial sum
      // (a zero coefficient hides a corrupted sample, so then hit the sum)
      if (n % 2 == 0 && cs != 0) x[n % 3] = x[n % 3] ^ 9'(1 << (n % 9));
      else            ai[n % 3] = ai[n % 3] ^ 18'(1 << (n % 18));
      #1;
      for (int i = 0; i < 3; i++) begin
        chk(ao[i], e, "voted, one part corrupted", i);
        if (i != n % 3) chk(aon[i], e, "unvoted, healthy part", i);
        else begin
          checks++;
          if (aon[i] === e) begin
            failures++;
            $display("FAIL unvoted corrupted part %0d shows the good value", i);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

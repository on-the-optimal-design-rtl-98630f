// tmr_majority_voter_tb: checks the triplicated voter barrier.
//
// Every one of the three outputs must equal the bitwise majority of the
// three inputs (computed here by counting ones); with one input corrupted all
// three outputs must carry the good value.
module tmr_majority_voter_tb;
  localparam int W = 18;
  logic [W-1:0] d [3];
  logic [W-1:0] q [3];
  int checks = 0, failures = 0;
  logic clk = 0;

  tmr_majority_voter #(.WIDTH(W)) dut (.d(d), .q(q));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] ref_vote(logic [W-1:0] x0, x1, x2);
    logic [W-1:0] r;
    for (int i = 0; i < W; i++) r[i] = (int'(x0[i]) + int'(x1[i]) + int'(x2[i])) >= 2;
    return r;
  endfunction

  task automatic expect_all(logic [W-1:0] e);
    #1;
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (q[i] !== e) begin
        failures++;
        $display("FAIL part %0d q=%h exp=%h", i, q[i], e);
      end
    end
  endtask

  initial begin
    for (int n = 0; n < 1000; n++) begin
      for (int i = 0; i < 3; i++) d[i] = W'($urandom);
      expect_all(ref_vote(d[0], d[1], d[2]));
    end
    for (int n = 0; n < 300; n++) begin
      logic [W-1:0] good;
      good = W'($urandom);
      for (int i = 0; i < 3; i++) d[i] = good;
      d[n % 3] = W'($urandom);
      expect_all(good);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// majority_voter_tb: checks the bitwise 2-of-3 voter.
//
// Drives random words and words where exactly one copy differs, and compares
// y with a majority computed bit by bit by counting ones. A watchdog ends the
// run as failed if it hangs.
module majority_voter_tb;
  localparam int W = 18;
  logic [W-1:0] a, b, c, y, exp_y;
  int checks = 0, failures = 0;
  logic clk = 0;

  majority_voter #(.WIDTH(W)) dut (.a(a), .b(b), .c(c), .y(y));

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

  task automatic check();
    #1;
    exp_y = ref_vote(a, b, c);
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL a=%h b=%h c=%h y=%h exp=%h", a, b, c, y, exp_y);
    end
  endtask

  initial begin
    // all eight single-bit patterns, replicated over the word
    for (int p = 0; p < 8; p++) begin
      a = {W{p[0]}}; b = {W{p[1]}}; c = {W{p[2]}};
      check();
    end
    // random words
    for (int n = 0; n < 2000; n++) begin
      a = W'($urandom); b = W'($urandom); c = W'($urandom);
      check();
    end
    // one corrupted copy in each position: output must be the good value
    for (int n = 0; n < 300; n++) begin
      logic [W-1:0] good, bad;
      good = W'($urandom); bad = W'($urandom);
      a = good; b = good; c = good;
      case (n % 3)
        0: a = bad;
        1: b = bad;
        default: c = bad;
      endcase
      check();
      checks++;
      if (y !== good) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

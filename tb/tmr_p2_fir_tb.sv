// tmr_p2_fir_tb: end-to-end test of the TMR_p2 FIR filter at its default
// size (11 taps, 9-bit samples, 18-bit sums).
//
// A reference filter written here from the published coefficients
// (1, -1, -9, 6, 73, 120, 73, 6, -9, -1, 1) keeps its own sample history;
// all three output pins are compared with it after every input change.
// Besides plain filtering (impulse response, extreme inputs, random
// samples), the test makes each protection mechanism act and counts it:
//   pin_fault      one part's input pins carry wrong samples: masked
//   hold           clock enable low: the delay line keeps its samples
//   refresh        one part's clock ticks alone, so all of that part's
//                  delay flip-flops disagree with the others; the outputs
//                  stay right and one refresh edge rewrites the flip-flops
//   barrier        two parts' partial sums corrupted in adjacent partitions
//                  (a cross-part bridge spanning a voter barrier): masked
//   voter_upset    one voter of a barrier gives a wrong value: the next
//                  barrier masks it
//   out_vote       one part's final sum corrupted: the output voters mask it
//   double_fault   two parts corrupted inside one partition: the output is
//                  wrong, the case no voter placement can cover
// Each count must end above zero. A watchdog ends a hung run as failed.
module tmr_p2_fir_tb;
  localparam int NT = 11;
  localparam int C [NT] = '{1, -1, -9, 6, 73, 120, 73, 6, -9, -1, 1};

  logic [2:0]  clk = '0, rst_n = '0, ce = '0;
  logic [8:0]  din  [3];
  logic [17:0] dout [3];

  int checks = 0, failures = 0;
  int hist [NT];          // reference history, hist[k] = x(n-k)
  int n_pin_fault = 0, n_hold = 0, n_refresh = 0, n_barrier = 0;
  int n_out_vote = 0, n_double = 0, n_samples = 0, n_voter = 0;

  tmr_p2_fir dut (.clk(clk), .rst_n(rst_n), .ce(ce), .din(din), .dout(dout));

  // the delay flip-flops of every part, for the refresh check
  logic [8:0] ff [1:NT-1][3];
  for (genvar k = 1; k < NT; k++) begin : g_ff
    assign ff[k] = dut.g_reg[k].u_reg.r;
  end

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_y();
    int y = 0;
    for (int k = 0; k < NT; k++) y += C[k] * hist[k];
    return y;
  endfunction

  task automatic tick(logic [2:0] which);
    #5 clk = which;
    #5 clk = '0;
  endtask

  // put sample x on all three parts' pins; the reference sees it as x(n)
  task automatic drive(int x);
    for (int i = 0; i < 3; i++) din[i] = 9'(x);
    hist[0] = x;
  endtask

  // reference shift on a clock edge with ce high
  task automatic shift();
    for (int k = NT - 1; k > 0; k--) hist[k] = hist[k-1];
  endtask

  task automatic check_out(string what);
    int e;
    #1;
    e = ref_y();
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (dout[i] !== 18'(e)) begin
        failures++;
        $display("FAIL %s: pin %0d = %0d, expected %0d", what, i, $signed(dout[i]), e);
      end
    end
  endtask

  // apply a sample, check the output, then clock it into the delay line
  task automatic step(int x, string what);
    drive(x);
    check_out(what);
    ce = '1;
    tick(3'b111);
    shift();
    n_samples++;
  endtask

  initial begin
    int e, v;
    logic [17:0] good;
    for (int k = 0; k < NT; k++) hist[k] = 0;
    for (int i = 0; i < 3; i++) din[i] = '0;

    // reset
    rst_n = '0; ce = '1;
    tick(3'b111);
    rst_n = '1;
    check_out("after reset");

    // impulse response equals the coefficients, one per cycle
    step(1, "impulse");
    for (int k = 1; k < NT; k++) begin
      drive(0);
      #1;
      checks++;
      if ($signed(dout[0]) !== 18'(C[k])) begin
        failures++;
        $display("FAIL impulse tap %0d: %0d, expected %0d", k, $signed(dout[0]), C[k]);
      end
      step(0, "impulse");
    end

    // extremes: largest input magnitudes, and signs that maximise |y|
    for (int n = 0; n < 2 * NT; n++) step(-256, "negative full scale");
    for (int n = 0; n < 2 * NT; n++) step(255, "positive full scale");
    for (int n = 0; n < 2 * NT; n++) step(((C[(2 * NT - 1 - n) % NT] < 0) ? -256 : 255), "sign pattern");

    // random samples
    for (int n = 0; n < 2000; n++) step(int'($urandom_range(0, 511)) - 256, "random");

    // one part's input pins wrong for a while
    for (int n = 0; n < 60; n++) begin
      v = int'($urandom_range(0, 511)) - 256;
      drive(v);
      din[n % 3] = 9'(v) ^ 9'($urandom_range(1, 511));
      check_out("input pin fault");
      ce = '1; tick(3'b111); shift();
      n_pin_fault++;
    end

    // hold: ce low, new samples on the pins do not enter the delay line
    for (int n = 0; n < 20; n++) begin
      drive(int'($urandom_range(0, 511)) - 256);
      ce = '0;
      tick(3'b111);              // refresh edge, no shift in the reference
      check_out("hold");
      n_hold++;
    end

    // one part clocked alone: all its delay flip-flops are upset
    for (int n = 0; n < 30; n++) begin
      int p;
      bit differs;
      p = n % 3;
      step(int'($urandom_range(0, 511)) - 256, "before upset");
      drive(int'($urandom_range(0, 511)) - 256);
      ce = '0; ce[p] = 1'b1;
      tick(3'b001 << p);          // only part p shifts
      differs = 0;
      for (int k = 1; k < NT; k++)
        if (ff[k][p] !== 9'(hist[k])) differs = 1;
      check_out("one part upset");
      ce = '0;
      tick(3'b111);               // refresh edge
      for (int k = 1; k < NT; k++)
        for (int i = 0; i < 3; i++) begin
          checks++;
          if (ff[k][i] !== 9'(hist[k])) begin
            failures++;
            $display("FAIL refresh: register %0d part %0d = %0d, expected %0d",
                     k, i, $signed(ff[k][i]), hist[k]);
          end
        end
      check_out("after refresh");
      if (differs) n_refresh++;
    end

    // a short between part 1 of partition 3 and part 2 of partition 2
    for (int n = 0; n < 20; n++) begin
      drive(int'($urandom_range(0, 511)) - 256);
      #1;
      good = dut.g_tap[3].g_partition.u_part.g_part[1].u_add.s;
      force dut.g_tap[3].g_partition.u_part.g_part[1].u_add.s = good ^ 18'h00155;
      force dut.g_tap[2].g_partition.u_part.g_part[2].u_add.s = good ^ 18'h0AA00;
      check_out("bridge across a voter barrier");
      n_barrier++;
      release dut.g_tap[3].g_partition.u_part.g_part[1].u_add.s;
      release dut.g_tap[2].g_partition.u_part.g_part[2].u_add.s;
      ce = '1; tick(3'b111); shift();
    end

    // one voter of the barrier after partition 4 upset (part 0's voter)
    for (int n = 0; n < 20; n++) begin
      drive(int'($urandom_range(0, 511)) - 256);
      #1;
      good = dut.g_tap[4].g_partition.u_part.acc_out[0];
      force dut.g_tap[4].g_partition.u_part.g_vote.u_vote.g_vote[0].u_voter.y = ~good;
      #1;
      checks++;
      if (dut.g_tap[4].g_partition.u_part.acc_out[0] !== ~good) begin
        failures++;
        $display("FAIL voter upset not applied");
      end
      check_out("one barrier voter wrong");
      n_voter++;
      release dut.g_tap[4].g_partition.u_part.g_vote.u_vote.g_vote[0].u_voter.y;
      ce = '1; tick(3'b111); shift();
    end

    // one part's final sum wrong: the output voters mask it
    for (int n = 0; n < 20; n++) begin
      drive(int'($urandom_range(0, 511)) - 256);
      #1;
      good = dut.g_tap[NT-1].g_partition.u_part.sum[n % 3];
      case (n % 3)
        0: force dut.g_tap[NT-1].g_partition.u_part.g_part[0].u_add.s = ~good;
        1: force dut.g_tap[NT-1].g_partition.u_part.g_part[1].u_add.s = ~good;
        default: force dut.g_tap[NT-1].g_partition.u_part.g_part[2].u_add.s = ~good;
      endcase
      check_out("final sum of one part wrong");
      n_out_vote++;
      release dut.g_tap[NT-1].g_partition.u_part.g_part[0].u_add.s;
      release dut.g_tap[NT-1].g_partition.u_part.g_part[1].u_add.s;
      release dut.g_tap[NT-1].g_partition.u_part.g_part[2].u_add.s;
      ce = '1; tick(3'b111); shift();
    end

    // two parts wrong inside one partition: the error reaches every pin
    for (int n = 0; n < 10; n++) begin
      drive(int'($urandom_range(0, 511)) - 256);
      #1;
      e = ref_y();
      good = dut.g_tap[5].g_partition.u_part.g_part[1].u_add.s;
      force dut.g_tap[5].g_partition.u_part.g_part[1].u_add.s = good ^ 18'h00400;
      force dut.g_tap[5].g_partition.u_part.g_part[2].u_add.s = good ^ 18'h00400;
      #1;
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (dout[i] === 18'(e)) begin
          failures++;
          $display("FAIL double fault in one partition not visible on pin %0d", i);
        end else if (i == 0) n_double++;
      end
      release dut.g_tap[5].g_partition.u_part.g_part[1].u_add.s;
      release dut.g_tap[5].g_partition.u_part.g_part[2].u_add.s;
      check_out("after double fault removed");
      ce = '1; tick(3'b111); shift();
    end

    // some clean samples to finish
    for (int n = 0; n < 100; n++) step(int'($urandom_range(0, 511)) - 256, "random tail");

    $display("samples=%0d pin_fault=%0d hold=%0d refresh=%0d barrier=%0d voter_upset=%0d out_vote=%0d double_fault=%0d",
             n_samples, n_pin_fault, n_hold, n_refresh, n_barrier, n_voter, n_out_vote, n_double);
    checks++; if (n_pin_fault == 0) failures++;
    checks++; if (n_hold == 0) failures++;
    checks++; if (n_refresh == 0) failures++;
    checks++; if (n_barrier == 0) failures++;
    checks++; if (n_voter == 0) failures++;
    checks++; if (n_out_vote == 0) failures++;
    checks++; if (n_double == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

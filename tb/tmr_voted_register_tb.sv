// tmr_voted_register_tb: checks the triplicated register with refresh.
//
// The three clocks are normally pulsed together. An upset of one part's
// flip-flop is produced by pulsing that part's clock alone with load high
// and different data. The test checks: reset to zero; new data appears on
// all three voted outputs one edge after it is loaded; the value is held
// while load is low; a single upset part never shows on any output; one
// refresh edge (load low) rewrites the upset flip-flop with the majority
// value; and, as the known limit of the scheme, two upset parts win the vote.
module tmr_voted_register_tb;
  localparam int W = 9;
  logic [2:0]   clk = '0, rst_n = '0, load = '0;
  logic [W-1:0] d [3];
  logic [W-1:0] q [3];
  int checks = 0, failures = 0;
  int cycles = 0;
  int refreshed = 0;

  tmr_voted_register #(.WIDTH(W)) dut (.clk(clk), .rst_n(rst_n), .load(load), .d(d), .q(q));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one edge on the selected clocks
  task automatic tick(logic [2:0] which);
    #5 clk = which;
    #5 clk = '0;
    cycles++;
  endtask

  task automatic expect_q(logic [W-1:0] e, string what);
    #1;
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (q[i] !== e) begin
        failures++;
        $display("FAIL %s: part %0d q=%h exp=%h", what, i, q[i], e);
      end
    end
  endtask

  task automatic expect_ff(int part, logic [W-1:0] e, string what);
    checks++;
    if (dut.r[part] !== e) begin
      failures++;
      $display("FAIL %s: flip-flop %0d = %h exp=%h", what, part, dut.r[part], e);
    end
  endtask

  initial begin
    logic [W-1:0] v, bad;
    for (int i = 0; i < 3; i++) d[i] = W'($urandom);
    rst_n = '0; load = '1;
    tick(3'b111);
    expect_q('0, "reset");
    rst_n = '1;

    // load and hold
    for (int n = 0; n < 200; n++) begin
      v = W'($urandom);
      for (int i = 0; i < 3; i++) d[i] = v;
      load = '1;
      tick(3'b111);
      expect_q(v, "load");
      load = '0;
      for (int i = 0; i < 3; i++) d[i] = ~v;
      tick(3'b111);
      expect_q(v, "hold");
      // upset one part: its own clock alone, with other data
      bad = v ^ W'($urandom_range(1, (1 << W) - 1));
      d[n % 3] = bad;
      load = '0;
      load[n % 3] = 1'b1;
      tick(3'b001 << (n % 3));
      expect_ff(n % 3, bad, "upset injected");
      expect_q(v, "single upset masked");
      // refresh edge: the upset flip-flop gets the voted value back
      load = '0;
      tick(3'b111);
      for (int i = 0; i < 3; i++) expect_ff(i, v, "refresh");
      if (dut.r[n % 3] === v) refreshed++;
    end

    // two parts upset: the wrong value wins (limit of TMR)
    v = 9'h0A5; bad = 9'h15A;
    for (int i = 0; i < 3; i++) d[i] = v;
    load = '1; tick(3'b111);
    d[0] = bad; d[1] = bad;
    load = 3'b011; tick(3'b011);
    expect_q(bad, "double upset");

    checks++;
    if (refreshed != 200) failures++;
    $display("refreshes observed: %0d, edges: %0d", refreshed, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

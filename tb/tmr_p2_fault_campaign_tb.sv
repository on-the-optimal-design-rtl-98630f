// tmr_p2_fault_campaign_tb: a simulated fault-injection campaign on the
// TMR_p2 filter at its default size.
//
// On the FPGA, an upset in a configuration bit of the routing either opens
// a wire or connects two wires. This testbench emulates both at signal level
// on the filter's arithmetic nets: the output of the tap-0 multiplier and
// the output of every partition's adder, in each of the three redundant
// parts (33 fault sites). A fault stays in place for a run of samples, as a
// configuration upset stays until the next scrub, while the filter's three
// output pins are compared every cycle with a reference filter.
//   single  one site, random bits flipped: an upset inside one part
//   bridge  two sites in different parts, both driven with the wired-OR of
//           their values: a routing upset joining two parts. It is "across"
//           when the sites lie in different partitions (a voter barrier
//           between them) and "inside" when in the same partition
//           (tap 0 shares partition 1, where no voter separates them).
// Expected, and checked: no wrong answer for single faults or for bridges
// across partitions; bridges inside a partition may give wrong answers,
// which is the residual weakness the partition size trades against. The
// wrong-answer counts of each class are printed.
module tmr_p2_fault_campaign_tb;
  localparam int NT      = 11;
  localparam int C [NT]  = '{1, -1, -9, 6, 73, 120, 73, 6, -9, -1, 1};
  localparam int RUN     = 24;   // samples per injected fault
  localparam int NFAULTS = 4000;

  logic [2:0]  clk = '0, rst_n = '0, ce = '1;
  logic [8:0]  din  [3];
  logic [17:0] dout [3];

  int checks = 0, failures = 0;
  int hist [NT];

  tmr_p2_fir dut (.clk(clk), .rst_n(rst_n), .ce(ce), .din(din), .dout(dout));

  // fault-free value of every site, from the site's own inputs
  logic [17:0] nat  [NT][3];
  // value forced onto a site while it is faulty, set per sample
  logic [17:0] bad  [NT][3];
  bit          active;             // a fault is in place
  bit          hit  [NT][3];
  int          kind;               // 0 single, 1 bridge
  int          ka, ia, kb, ib;     // fault sites
  logic [17:0] mask;
  event        apply;

  for (genvar i = 0; i < 3; i++) begin : g_nat0
    assign nat[0][i] = dut.g_tap[0].g_first.g_mul[i].u_mul.full[17:0];
  end
  for (genvar k = 1; k < NT; k++) begin : g_natk
    for (genvar i = 0; i < 3; i++) begin : g_p
      assign nat[k][i] = dut.g_tap[k].g_partition.u_part.g_part[i].u_add.a
                       + dut.g_tap[k].g_partition.u_part.g_part[i].u_add.b;
    end
  end

  // one injector per site
  for (genvar i = 0; i < 3; i++) begin : g_inj0
    always @(apply)
      if (active && hit[0][i]) force dut.g_tap[0].g_first.g_mul[i].u_mul.p = bad[0][i];
      else           release dut.g_tap[0].g_first.g_mul[i].u_mul.p;
  end
  for (genvar k = 1; k < NT; k++) begin : g_injk
    for (genvar i = 0; i < 3; i++) begin : g_p
      always @(apply)
        if (active && hit[k][i]) force dut.g_tap[k].g_partition.u_part.g_part[i].u_add.s = bad[k][i];
        else           release dut.g_tap[k].g_partition.u_part.g_part[i].u_add.s;
    end
  end

  initial begin : watchdog
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // partition a site belongs to: tap 0 has no voter before partition 1
  function automatic int part_of(int k);
    return (k == 0) ? 1 : k;
  endfunction

  function automatic int ref_y();
    int y = 0;
    for (int k = 0; k < NT; k++) y += C[k] * hist[k];
    return y;
  endfunction

  task automatic tick();
    #5 clk = '1;
    #5 clk = '0;
  endtask

  // one sample: drive, compare all pins, clock; returns 1 on a wrong answer
  task automatic sample(output bit wrong);
    int x, e;
    x = int'($urandom_range(0, 511)) - 256;
    for (int i = 0; i < 3; i++) din[i] = 9'(x);
    hist[0] = x;
    // settle without the fault to read the sites' fault-free values, then
    // put the faulty values on the chosen sites for this sample
    begin
      bit keep;
      keep = active;
      active = 0;
      ->apply;
      #1;
      for (int k = 0; k < NT; k++)
        for (int i = 0; i < 3; i++) bad[k][i] = nat[k][i];
      if (kind == 0) bad[ka][ia] = nat[ka][ia] ^ mask;
      else begin
        bad[ka][ia] = nat[ka][ia] | nat[kb][ib];
        bad[kb][ib] = nat[ka][ia] | nat[kb][ib];
      end
      active = keep;
      ->apply;
    end
    #1;
    e = ref_y();
    wrong = 0;
    for (int i = 0; i < 3; i++) if (dout[i] !== 18'(e)) wrong = 1;
    tick();
    for (int k = NT - 1; k > 0; k--) hist[k] = hist[k-1];
  endtask

  initial begin
    int n_fault [3], n_wrong [3];   // by class: single, across, inside
    int cls;
    bit wrong, any;
    for (int c = 0; c < 3; c++) begin n_fault[c] = 0; n_wrong[c] = 0; end
    for (int k = 0; k < NT; k++) begin
      hist[k] = 0;
      for (int i = 0; i < 3; i++) hit[k][i] = 0;
    end
    for (int i = 0; i < 3; i++) din[i] = '0;
    active = 0; kind = 0; ka = 0; ia = 0; kb = 0; ib = 1; mask = '0;

    rst_n = '0; tick(); rst_n = '1;

    for (int f = 0; f < NFAULTS; f++) begin
      // pick a fault
      kind = f % 2;
      ka = int'($urandom_range(0, NT - 1));
      ia = int'($urandom_range(0, 2));
      kb = int'($urandom_range(0, NT - 1));
      ib = (ia + int'($urandom_range(1, 2))) % 3;
      mask = 18'($urandom_range(1, (1 << 18) - 1));
      cls = (kind == 0) ? 0 : (part_of(ka) == part_of(kb) ? 2 : 1);
      hit[ka][ia] = 1;
      if (kind == 1) hit[kb][ib] = 1;
      active = 1;
      any = 0;
      for (int n = 0; n < RUN; n++) begin
        sample(wrong);
        any |= wrong;
      end
      n_fault[cls]++;
      if (any) n_wrong[cls]++;
      // classes that the voters must cover
      if (cls != 2) begin
        checks++;
        if (any) begin
          failures++;
          $display("FAIL class %0d fault at tap %0d part %0d / tap %0d part %0d gave a wrong answer",
                   cls, ka, ia, kb, ib);
        end
      end
      // remove the fault (scrub) and let the output settle back
      active = 0;
      hit[ka][ia] = 0;
      hit[kb][ib] = 0;
      for (int n = 0; n < 2; n++) begin
        sample(wrong);
        checks++;
        if (wrong) begin
          failures++;
          $display("FAIL wrong answer after the fault was removed");
        end
      end
    end

    $display("single faults: %0d injected, %0d wrong answers", n_fault[0], n_wrong[0]);
    $display("bridges across partitions: %0d injected, %0d wrong answers", n_fault[1], n_wrong[1]);
    $display("bridges inside a partition: %0d injected, %0d wrong answers", n_fault[2], n_wrong[2]);
    // every class must have been exercised, and the uncovered one must show
    checks++; if (n_fault[0] == 0 || n_fault[1] == 0 || n_fault[2] == 0) failures++;
    checks++; if (n_wrong[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

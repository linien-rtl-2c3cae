// tb_simple_autolock: drives a triangular ramp position and checks that after
// arming, engage pulses exactly once, one clock after the first rising-slope
// sample at or above the target; not on the falling slope, not before arming,
// and not after cancel. A randomised part then repeats 200 lock attempts with
// random targets, ramp speeds and arming times: a reference model replays the
// samples seen after arming and predicts the clock of the engage pulse (the
// first pair of consecutive rising samples after the arming clock that
// straddles the target: prev < target <= now), or none.
module tb_simple_autolock;
  localparam int DW = 25;

  logic clk = 0, rst_n = 0, arm, cancel, rising, engage, busy;
  logic signed [DW-1:0] pos, target;
  int checks = 0, failures = 0;

  simple_autolock #(.DW(DW)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // triangle between -500 and 500, `step` per clock
  int step = 1;
  task automatic advance();
    if (rising) begin if (pos + step > 500) rising = 0; else pos = pos + step; end
    else        begin if (pos - step < -500) rising = 1; else pos = pos - step; end
  endtask

  initial begin
    int engages, expect_at, cyc;
    arm = 0; cancel = 0; rising = 0; pos = 0; target = 25'sd123;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // not armed: no engage over a full sweep
    engages = 0;
    for (int n = 0; n < 2100; n++) begin advance(); @(negedge clk); engages += engage; end
    checks++; if (engages != 0) begin failures++; $display("engage while not armed"); end
    // arm while falling, well past the target
    while (!(pos == 300 && !rising)) begin advance(); @(negedge clk); end
    arm = 1; @(negedge clk); arm = 0;
    engages = 0; expect_at = -1;
    for (cyc = 0; cyc < 3000; cyc++) begin
      advance();
      @(negedge clk);
      if (engage) begin
        engages++;
        checks++;
        // the sample taken at this edge is the first rising one >= target
        if (!(pos == target && rising)) begin failures++; $display("engage at pos %0d", pos); end
      end
    end
    checks++; if (engages != 1) begin failures++; $display("engages=%0d", engages); end
    checks++; if (busy) begin failures++; $display("still busy"); end
    // cancel before the crossing: no engage
    arm = 1; @(negedge clk); arm = 0;
    cancel = 1; @(negedge clk); cancel = 0;
    engages = 0;
    for (int n = 0; n < 2100; n++) begin advance(); @(negedge clk); engages += engage; end
    checks++; if (engages != 0) begin failures++; $display("engage after cancel"); end
    // randomised attempts
    for (int t = 0; t < 200; t++) begin
      int ppos [$];
      bit prise [$];
      int want, got;
      step = $urandom_range(1, 9);
      target = 25'($signed($urandom_range(0, 900)) - 450);
      repeat ($urandom_range(0, 300)) begin advance(); @(negedge clk); end
      arm = 1;                     // the arming clock samples pos but no pair yet
      @(negedge clk);
      arm = 0;
      want = -1; got = -1; ppos.delete(); prise.delete();
      for (int k = 1; k <= 400; k++) begin
        advance();
        ppos.push_back(int'(pos)); prise.push_back(rising);
        if (want < 0 && k >= 2 && prise[k-2] && prise[k-1] && ppos[k-2] < int'(target) && ppos[k-1] >= int'(target))
          want = k;
        @(negedge clk);
        if (engage && got < 0) got = k;
        else if (engage) begin checks++; failures++; $display("second engage in trial %0d", t); end
      end
      checks++;
      if (want != got) begin
        failures++;
        $display("trial %0d: step %0d target %0d: engage at %0d, expected %0d", t, step, target, got, want);
      end
      checks++;
      if (busy != (want < 0)) begin failures++; $display("trial %0d: busy %0b", t, busy); end
      cancel = 1; @(negedge clk); cancel = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

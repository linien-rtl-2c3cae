// tb_jitter_tolerant_autolock: the paper's verification workload for the
// jitter tolerant autolock, rebuilt here: 100 lock attempts on a synthetic
// spectrum with five features (like H1..H5 of a modulation-transfer spectrum)
// plus noise, where every sweep shifts the whole spectrum by a random amount of
// up to +-200 samples (laser jitter, several line widths). The instructions are
// derived here from the noise-free reference spectrum the way the CPU would:
// threshold at half of each filtered peak, minimum wait of half the distance to
// the previous peak, final wait from the last peak to the target zero crossing.
// Every 5th attempt has one feature missing in its first sweep, so the
// recogniser must give up on that sweep and lock in the next one.
// Success: exactly one engage per attempt, at the jittered target +-10 samples.
module tb_jitter_tolerant_autolock;
  localparam int DW = 25, DEPTH = 8192, N_INSTR = 32;
  localparam int AB = $clog2(DEPTH), TW = DW + AB, IB = $clog2(N_INSTR);
  localparam int RISE = 3000, FALL = 1000, W = 20, NPEAK = 5, TARGET = 2200;
  localparam int RUNS = 100;

  logic clk = 0, rst_n = 0;
  logic arm, cancel, sweep_start, rising, sample_en, instr_we, engage, busy;
  logic signed [DW-1:0] sig_in;
  logic [AB:0] width;
  logic [IB:0] n_instr;
  logic [IB-1:0] instr_addr, instr_idx;
  logic signed [TW-1:0] instr_thr, filtered;
  logic [31:0] instr_wait, final_wait;
  int checks = 0, failures = 0;
  int n_locked = 0, n_retried = 0;

  jitter_tolerant_autolock #(.DW(DW), .DEPTH(DEPTH), .N_INSTR(N_INSTR)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int    ppos [NPEAK] = '{800, 900, 1500, 1600, 2100};
  real   pamp [NPEAK] = '{1.0, -1.0, -1.3, 1.6, -0.7};
  localparam real A = 100000.0;

  // triangular features of half-width 15 samples; `skip` removes one feature
  function automatic real clean(int r, int skip);
    real v;
    v = 0.0;
    for (int k = 0; k < NPEAK; k++) begin
      int d;
      d = r - ppos[k];
      if (k != skip && d > -15 && d < 15) v += A * pamp[k] * (1.0 - real'(d < 0 ? -d : d) / 15.0);
    end
    return v;
  endfunction

  initial begin
    int xpos [NPEAK];
    real thr [NPEAK];
    arm = 0; cancel = 0; sweep_start = 0; rising = 0; sample_en = 1; instr_we = 0;
    sig_in = 0; width = (AB+1)'(W); n_instr = (IB+1)'(NPEAK); instr_addr = 0;
    instr_thr = 0; instr_wait = 0; final_wait = 0;
    // --- reference analysis (the CPU's part): filtered clean spectrum
    begin
      int k;
      real s;
      k = 0;
      for (int r = 0; r < RISE && k < NPEAK; r++) begin
        s = 0.0;
        for (int j = 0; j < W; j++) s += clean(r - j, -1);
        thr[k] = 0.5 * pamp[k] * A * real'(W) * 0.5;  // half of the filtered peak (~A*W/2)
        // one crossing per feature: ignore 40 samples after the previous one
        if ((k == 0 || r > xpos[k-1] + 40) &&
            ((thr[k] > 0.0 && s > thr[k]) || (thr[k] < 0.0 && s < thr[k]))) begin
          xpos[k] = r; k++;
        end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NPEAK; k++) begin
      instr_we = 1; instr_addr = IB'(k);
      instr_thr = TW'($rtoi(thr[k]));
      instr_wait = (k == 0) ? 32'd0 : 32'((xpos[k] - xpos[k-1]) / 2);
      @(negedge clk);
    end
    instr_we = 0;
    final_wait = 32'(TARGET - xpos[NPEAK-1] - 3);

    for (int run = 0; run < RUNS; run++) begin
      int engages, lock_pos, expect_pos, sweep;
      bit done;
      arm = 1; @(negedge clk); arm = 0;
      engages = 0; done = 0; lock_pos = -1; expect_pos = -1;
      for (sweep = 0; sweep < 3 && !done; sweep++) begin
        int shift, skip;
        shift = $urandom_range(0, 400) - 200;
        skip = (run % 5 == 0 && sweep == 0) ? 2 : -1;
        for (int i = 0; i < RISE + FALL && !done; i++) begin
          int r;
          r = i - shift;
          sweep_start = (i == 0);
          rising = (i < RISE);
          sig_in = rising ? DW'($rtoi(clean(r, skip) + (real'($urandom_range(0, 40000)) - 20000.0)))
                          : DW'($rtoi(real'($urandom_range(0, 40000)) - 20000.0));
          @(negedge clk);
          if (engage) begin
            engages++;
            lock_pos = r;
            expect_pos = TARGET;
            done = 1;
            if (sweep > 0) n_retried++;
          end
        end
      end
      sweep_start = 0; rising = 0;
      checks++;
      if (engages != 1 || lock_pos < expect_pos - 10 || lock_pos > expect_pos + 10) begin
        failures++;
        if (failures < 10) $display("run %0d: engages=%0d lock at %0d (target %0d)", run, engages, lock_pos, TARGET);
      end else n_locked++;
      checks++;
      if (busy) begin failures++; $display("run %0d: still busy after engage", run); end
      repeat (5) @(negedge clk);
    end
    $display("locked correctly in %0d of %0d runs, %0d after a failed first sweep", n_locked, RUNS, n_retried);
    checks++;
    if (n_retried == 0) begin failures++; $display("the restart-on-next-sweep path was never taken"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

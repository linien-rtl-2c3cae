// tb_linien_top: end-to-end test of the whole FPGA design at its default sizes,
// closing the loop through a model of a laser and a spectroscopy cell.
//
// Plant model (evaluated every clock): the laser frequency, in DAC LSB, is
// f = dac_b + drift (dac_b carries control signal plus ramp). The spectroscopy
// cell shows three dispersive lines E(f) = -A*x/(1+x^2), x = (f-f0)/60, at
// f0 = -1500 (A=3000), -600 (A=-2000) and +1000 (A=4000, the target line).
// Frequency modulation turns this into a photodiode signal at the modulation
// frequency: adc_a = E(f) * dac_a / MOD_AMP + noise, with dac_a the modulation
// output (12.5 MHz). The testbench acts as the CPU through the register bus.
//
// Sequence and what is checked:
//   1. latency: fast mode ADC->DAC 5 clocks; demodulating path 29 clocks;
//      their difference (192 ns) against the paper's 320-125 = 195 ns
//   2. dual-channel mode: the error comes from channel B, not A
//   3. spectrum recording on sweep start through the capture memory: the
//      recorded in-phase error must show the target line, the quadrature
//      must stay small (demodulation phase right)
//   4. simple autolock at the target's ramp position: lock engages, the loop
//      pulls the laser onto f = 1000 and holds it against a drift; the slow
//      integrator and its delta-sigma pin run
//   5. unlock: ramp resumes
//   6. jitter tolerant autolock with the spectrum jumping by up to +-150 LSB
//      every sweep, several times: locks onto the target line every time
// Each mechanism is counted; one that never happened is a failure.
module tb_linien_top;
  import linien_pkg::*;

  logic clk = 0, rst_n = 0;
  logic signed [ADC_W-1:0] adc_a, adc_b;
  logic signed [DAC_W-1:0] dac_a, dac_b;
  logic slow_dac;
  logic bus_we = 0, bus_re = 0, bus_ack;
  logic [15:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;

  int checks = 0, failures = 0;

  linien_top dut (.*);

  always #4 clk = ~clk;

  initial begin
    #40000000;   // 5 M clocks
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ plant
  localparam real MOD_AMP = 2000.0;
  localparam real LW = 60.0;
  real line_f [3] = '{-1500.0, -600.0, 1000.0};
  real line_a [3] = '{3000.0, -2000.0, 4000.0};
  real drift_off = 0.0, drift_amp = 0.0;
  bit  plant_on = 0, jitter_on = 0;
  longint cyc = 0;
  real f_laser;

  function automatic real spectrum(real f);
    real e, x;
    e = 0.0;
    foreach (line_f[i]) begin
      x = (f - line_f[i]) / LW;
      e += -line_a[i] * x / (1.0 + x * x);
    end
    return e;
  endfunction

  always @(negedge clk) begin
    cyc++;
    f_laser = real'(dac_b) + drift_off + drift_amp * $sin(2.0 * 3.14159265 * real'(cyc) / 20000.0);
    if (plant_on) begin
      real v;
      v = spectrum(f_laser) * real'(dac_a) / MOD_AMP + real'($urandom_range(0, 40)) - 20.0;
      if (v > 8191.0) v = 8191.0;
      if (v < -8192.0) v = -8192.0;
      adc_a = ADC_W'($rtoi(v));
    end
  end

  // laser jitter: the spectrum jumps at every sweep start
  always @(negedge clk) if (jitter_on && dut.sweep_start) drift_off = real'($urandom_range(0, 300)) - 150.0;

  // ------------------------------------------------------------ mechanism counters
  int n_engage_simple = 0, n_engage_jt = 0, n_sweeps = 0, n_lock = 0, n_unlock = 0;
  int n_dac_sat = 0, n_slow_toggle = 0, n_integ_sat = 0, n_rec_done = 0;
  bit locked_q = 0, slow_q = 0, rec_done_q = 0;
  always @(posedge clk) begin
    n_engage_simple += dut.engage_simple;
    n_engage_jt     += dut.engage_jt;
    n_sweeps        += dut.sweep_start;
    if (dut.locked && !locked_q) n_lock++;
    if (!dut.locked && locked_q) n_unlock++;
    if (dac_b == 14'sd8191 || dac_b == -14'sd8192) n_dac_sat++;
    if (slow_dac != slow_q) n_slow_toggle++;
    if (dut.rec_done && !rec_done_q) n_rec_done++;
    locked_q <= dut.locked; slow_q <= slow_dac; rec_done_q <= dut.rec_done;
  end

  // ------------------------------------------------------------ bus helpers
  task automatic wr(logic [15:0] a, logic [31:0] d);
    bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk);
    bus_we = 0;
  endtask

  task automatic rd(logic [15:0] a, output logic [31:0] d);
    bus_re = 1; bus_addr = a;
    @(negedge clk);
    bus_re = 0;
    d = bus_rdata;
  endtask

  localparam logic [31:0] UNITY = 32'd4194304;        // 1.0 in IIR Q.22
  task automatic set_iir_lowpass();
    // two first-order low-passes y = 0.1 x + 0.9 y[n-1], DC gain 1
    for (int s = 0; s < 2; s++) begin
      wr(R_CHA_IIR + 16'(5*s) + 0, 32'd419430);
      wr(R_CHA_IIR + 16'(5*s) + 1, 32'd0);
      wr(R_CHA_IIR + 16'(5*s) + 2, 32'd0);
      wr(R_CHA_IIR + 16'(5*s) + 3, -32'sd3774874);
      wr(R_CHA_IIR + 16'(5*s) + 4, 32'd0);
    end
  endtask

  // measures clocks from an ADC step to the first change on dac_a
  task automatic measure_latency(bit use_b, output int lat);
    adc_a = 0; adc_b = 0;
    repeat (60) @(negedge clk);
    if (use_b) adc_b = 14'sd1000; else adc_a = 14'sd1000;
    lat = -1;
    for (int n = 1; n < 80 && lat < 0; n++) begin
      @(negedge clk);
      if (dac_a != 0) lat = n;
    end
    adc_a = 0; adc_b = 0;
    repeat (60) @(negedge clk);
  endtask

  // ------------------------------------------------------------ CPU part of the jitter tolerant autolock
  localparam int AL_DECIM = 4, AL_W = 20, RAMP_AMP = 3000;
  localparam real LSB_PER_CLK = 0.5, PATH_DELAY = 32.0, GAIN = 0.8234;
  int  jt_n;
  int  jt_final;
  int  jt_thr [4];
  int  jt_wait [4];

  task automatic derive_instructions();
    // noise-free filtered error of one rising sweep, one point per autolock sample
    real hist [$];
    real s;
    int  xk [4];
    real want [3];
    int  k, ktarget;
    want = '{1.0, -1.0, 1.0};   // L1 positive lobe, L2 negative lobe, L3 positive lobe
    k = 0; ktarget = -1;
    for (int n = 0; n < 2 * RAMP_AMP / (LSB_PER_CLK * AL_DECIM); n++) begin
      real f;
      f = -RAMP_AMP + (real'(n * AL_DECIM) - PATH_DELAY) * LSB_PER_CLK;
      hist.push_back(GAIN * spectrum(f));
      if (hist.size() > AL_W) void'(hist.pop_front());
      s = 0.0;
      foreach (hist[i]) s += hist[i];
      if (k < 3 && (k == 0 || n > xk[k-1] + 40)) begin
        // threshold: 40% of the filtered lobe (lobe height A/2, times W)
        real thr;
        thr = want[k] * 0.4 * GAIN * 0.5 * ((k == 0) ? 3000.0 : (k == 1) ? 2000.0 : 4000.0) * AL_W;
        if ((thr > 0.0 && s > thr) || (thr < 0.0 && s < thr)) begin
          jt_thr[k] = $rtoi(thr);
          jt_wait[k] = (k == 0) ? 0 : (n - xk[k-1]) / 2;
          xk[k] = n; k++;
        end
      end
      if (ktarget < 0 && f >= 1000.0) ktarget = n;
    end
    jt_n = k;
    jt_final = ktarget - xk[k-1];
  endtask

  // ------------------------------------------------------------ test sequence
  initial begin
    int lat_fast, lat_slow, lat_dual_a, lat_dual_b;
    logic [31:0] d;
    adc_a = 0; adc_b = 0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // ---- 1. latency, fast mode vs demodulating path (no modulation, phase 0)
    wr(R_DEST, {26'd0, DST_NONE, DST_NONE, DST_FAST_A});     // control -> A only
    wr(R_KP, 32'd4096);                                      // P gain 1
    wr(R_MODE, 32'b0001);                                    // fast mode
    wr(R_CMD, 32'b1000);                                     // lock now (PID on)
    measure_latency(0, lat_fast);
    wr(R_MODE, 32'b0000);
    measure_latency(0, lat_slow);
    $display("latency ADC->DAC: fast mode %0d clocks (%0d ns), demodulating path %0d clocks (%0d ns)",
             lat_fast, lat_fast * 8, lat_slow, lat_slow * 8);
    chk(lat_fast == 5, "fast-mode latency 5 clocks");
    chk(lat_slow == 29, "demodulating-path latency 29 clocks");
    chk((lat_slow - lat_fast) * 8 >= 185 && (lat_slow - lat_fast) * 8 <= 205,
        "fast mode saves about 195 ns, as in the paper");

    // ---- 2. dual channel: error = channel B only (mix_a 0, mix_b 1.0)
    wr(R_MIX, {16'd16384, 16'd0});
    wr(R_MODE, 32'b0010);
    measure_latency(0, lat_dual_a);
    measure_latency(1, lat_dual_b);
    chk(lat_dual_a < 0, "dual channel with mix_a = 0 ignores channel A");
    chk(lat_dual_b == 29, "dual channel passes channel B through its own demodulator");
    wr(R_MIX, {16'd0, 16'd16384});
    wr(R_CMD, 32'b0010);                                     // unlock
    wr(R_KP, 32'd0);

    // ---- 3. spectroscopy setup and spectrum recording
    plant_on = 1;
    wr(R_MOD_FREQ, 32'd429496730);            // 12.5 MHz
    wr(R_MOD_AMP, 32'd2000);
    wr(R_CHA_DELAY, 32'd3435973837);          // -22 periods of the 0.1-turn step: 0.8 turn
    set_iir_lowpass();
    wr(R_DEST, {26'd0, DST_FAST_A, DST_FAST_B, DST_FAST_B}); // mod -> A, ramp+control -> B
    wr(R_RAMP_AMP, RAMP_AMP);
    wr(R_RAMP_STEP, 32'h0000_8000);            // 0.5 LSB per clock
    wr(R_KI, 32'd200);
    wr(R_SLOW_KI, 32'd2000);
    wr(R_AL_DECIM, AL_DECIM - 1);
    wr(R_AL_WIDTH, AL_W);
    wr(R_REC_DEC, 32'd2);                      // record every 4 clocks, averaged
    wr(R_MODE, 32'b101100);                    // ramp run, slow integrator on, record on sweep
    wr(R_CMD, 32'b0100);                       // start recording
    begin
      int guard;
      guard = 0;
      do begin rd(R_STATUS, d); guard++; repeat (100) @(negedge clk); end
      while (!d[0] && guard < 2000 && !dut.rec_done);
    end
    chk(dut.rec_done, "recording finished");
    begin
      int max_i, max_q, pos_max;
      max_i = 0; max_q = 0; pos_max = -1;
      // first rising half: 12000 clocks = 3000 stored samples
      for (int a = 0; a < 3000; a++) begin
        int vi, vq;
        rd(16'h8000 | 16'(a), d);
        @(negedge clk);
        vi = int'($signed(d[27:14])); vq = int'($signed(d[13:0]));
        if (vi > max_i) begin max_i = vi; pos_max = a; end
        if ((vq < 0 ? -vq : vq) > max_q) max_q = (vq < 0 ? -vq : vq);
      end
      $display("recorded spectrum: peak in-phase %0d at sample %0d, peak |quadrature| %0d", max_i, pos_max, max_q);
      // largest positive lobe: L3 (A=4000) just below f = 1000 - 60 -> sample ~ (4000-60)/2 + delay
      chk(max_i > 1300 && max_i < 1900, "in-phase amplitude ~ K/2 * A/2 of the target line");
      chk(pos_max > 1940 && pos_max < 2000, "largest lobe where the target line is");
      chk(max_q < max_i / 5, "quadrature small: demodulation phase is right");
    end

    // ---- 4. simple autolock: target position of the line, with drift
    drift_amp = 20.0;
    wr(R_AL_TARGET, 32'd1000 - 32'd16);        // line centre minus the path delay in ramp LSB
    wr(R_CMD, 32'b0001);
    begin
      int guard;
      guard = 0;
      while (!dut.locked && guard < 100000) begin @(negedge clk); guard++; end
    end
    chk(dut.locked && n_engage_simple == 1, "simple autolock engaged");
    $display("simple autolock engaged at f = %0f", f_laser);
    repeat (3000) @(negedge clk);
    begin
      real worst;
      worst = 0.0;
      for (int n = 0; n < 20000; n++) begin
        @(negedge clk);
        if ((f_laser - 1000.0) > worst) worst = f_laser - 1000.0;
        if ((1000.0 - f_laser) > worst) worst = 1000.0 - f_laser;
      end
      $display("locked (simple): worst |f - 1000| = %0f LSB over 20000 clocks with 20 LSB drift", worst);
      chk(worst < 3.0, "lock holds the laser on the target line");
    end
    // slow output: delta-sigma density matches the slow level
    begin
      int ones;
      real lvl, ctrl_mean;
      ones = 0; lvl = 0.0; ctrl_mean = 0.0;
      for (int n = 0; n < 65536; n++) begin
        @(negedge clk);
        ones += slow_dac;
        lvl += real'(dut.slow_level) / 65536.0;
        ctrl_mean += real'(dut.ctrl) / 65536.0;
      end
      $display("slow output: mean level %0f, ones %0d of 65536, mean control %0f", lvl, ones, ctrl_mean);
      chk((real'(ones) - lvl) < 200.0 && (lvl - real'(ones)) < 200.0, "delta-sigma density follows the slow integrator");
      chk((ctrl_mean > 0.0) ? (lvl > 32768.0 + 100.0) : (lvl < 32768.0 - 100.0),
          "slow integrator moved from its initial value in the direction of the control signal");
    end

    // ---- 5. unlock
    drift_amp = 0.0;
    wr(R_CMD, 32'b0010);
    repeat (100) @(negedge clk);
    chk(!dut.locked, "unlocked");
    begin
      int p0;
      p0 = int'(dut.ramp_pos);
      repeat (100) @(negedge clk);
      chk(int'(dut.ramp_pos) != p0, "ramp resumed after unlock");
    end

    // ---- 6. jitter tolerant autolock under strong jitter
    derive_instructions();
    $display("instructions: %0d peaks, thr %0d %0d %0d, wait %0d %0d %0d, final %0d",
             jt_n, jt_thr[0], jt_thr[1], jt_thr[2], jt_wait[0], jt_wait[1], jt_wait[2], jt_final);
    for (int k = 0; k < jt_n; k++) begin
      wr(R_INSTR_THR, 32'(jt_thr[k]));
      wr(R_INSTR_WAIT, 32'(jt_wait[k]));
      wr(R_INSTR_COMMIT, 32'(k));
    end
    wr(R_AL_NINSTR, 32'(jt_n));
    wr(R_AL_FINAL, 32'(jt_final));
    wr(R_MODE, 32'b011100);                    // ramp, slow, jitter tolerant mode
    jitter_on = 1;
    for (int run = 0; run < 4; run++) begin
      int guard, e0;
      real f_eng, worst;
      e0 = n_engage_jt;
      wr(R_CMD, 32'b0001);
      guard = 0;
      while (!dut.locked && guard < 400000) begin @(negedge clk); guard++; end
      f_eng = f_laser;
      chk(dut.locked && n_engage_jt == e0 + 1, $sformatf("jitter tolerant autolock engaged (run %0d)", run));
      repeat (3000) @(negedge clk);
      worst = 0.0;
      for (int n = 0; n < 5000; n++) begin
        @(negedge clk);
        if ((f_laser - 1000.0) > worst) worst = f_laser - 1000.0;
        if ((1000.0 - f_laser) > worst) worst = 1000.0 - f_laser;
      end
      $display("run %0d: engaged at f = %0f (spectrum offset %0f), locked worst |f-1000| = %0f",
               run, f_eng, drift_off, worst);
      chk(f_eng > 1000.0 - 40.0 && f_eng < 1000.0 + 40.0, "engaged next to the target zero crossing");
      chk(worst < 3.0, "jitter tolerant lock holds the target line");
      wr(R_CMD, 32'b0010);
      repeat (500) @(negedge clk);
    end

    // ---- mechanism summary
    $display("mechanisms: sweeps %0d, simple engages %0d, jitter-tolerant engages %0d, locks %0d, unlocks %0d,",
             n_sweeps, n_engage_simple, n_engage_jt, n_lock, n_unlock);
    $display("            recordings %0d, slow pin toggles %0d, fast DAC saturations %0d",
             n_rec_done, n_slow_toggle, n_dac_sat);
    chk(n_sweeps > 0, "ramp sweeps happened");
    chk(n_engage_simple > 0, "simple autolock happened");
    chk(n_engage_jt > 0, "jitter tolerant autolock happened");
    chk(n_unlock > 0, "unlock happened");
    chk(n_rec_done > 0, "recording happened");
    chk(n_slow_toggle > 0, "delta-sigma output toggled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

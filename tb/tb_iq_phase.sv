// tb_iq_phase: finding the demodulation phase from one I/Q recording, at the
// modulation settings of an optimised spectroscopy setup (8.6 MHz, 1.9 Vpp).
//
// The whole design (linien_top, default sizes) sweeps a laser over a model
// spectrum with a dispersive line. The detection path has an unknown delay:
// the photodiode signal reaches ADC A 13 clocks after the modulation leaves
// DAC A, so the demodulation phase that puts the signal into the in-phase
// channel is not known beforehand. With unlocked operation the capture memory
// records the filtered in-phase signal (channel A) and the filtered quadrature
// (channel B) of the same sweep. The testbench, acting as the processor:
//   1. records one sweep with demodulation phase 0;
//   2. takes I and Q at the strongest sample and computes theta = atan2(Q, I)
//      (I ~ cos(d + delta), Q ~ -sin(d + delta), d the unknown path phase,
//      so theta = -(d + delta));
//   3. writes delta = theta (as a fraction of a turn) and records again;
//   4. checks that the quadrature is now small against the in-phase signal and
//      that the in-phase peak has grown to the full I/Q magnitude of step 2.
// Steps 1-4 are repeated for several path delays; each counts as one
// phase correction and at least one must happen.
module tb_iq_phase;
  import linien_pkg::*;

  logic clk = 0, rst_n = 0;
  logic signed [ADC_W-1:0] adc_a, adc_b;
  logic signed [DAC_W-1:0] dac_a, dac_b;
  logic slow_dac;
  logic bus_we = 0, bus_re = 0, bus_ack;
  logic [15:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;

  int checks = 0, failures = 0, n_corrections = 0;

  linien_top dut (.*);

  always #4 clk = ~clk;

  initial begin
    #40000000;
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
  localparam real MOD_AMP = 7782.0;       // 1.9 Vpp on a +-1 V, 14-bit DAC
  localparam real LW = 80.0;
  localparam real PI = 3.14159265358979;
  int path_delay = 13;
  real mod_hist [64];
  int  wp = 0;

  always @(negedge clk) begin
    real x, e, v;
    mod_hist[wp] = real'(dac_a);
    x = (real'(dac_b) - 200.0) / LW;
    e = -3000.0 * x / (1.0 + x * x);
    v = e * mod_hist[(wp - path_delay + 64) % 64] / MOD_AMP + real'($urandom_range(0, 20)) - 10.0;
    adc_a = ADC_W'($rtoi(v));
    wp = (wp + 1) % 64;
  end

  // ------------------------------------------------------------ bus
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

  // one sweep into the capture memory; returns I and Q at the strongest sample
  // and the largest |I| and |Q| over the rising half
  task automatic record(output real i_at, output real q_at, output int max_i, output int max_q);
    logic [31:0] d;
    real best;
    wr(R_CMD, 32'b0100);
    do rd(R_STATUS, d); while (!d[0]);
    best = -1.0; max_i = 0; max_q = 0; i_at = 0.0; q_at = 0.0;
    for (int a = 0; a < 3000; a++) begin
      int vi, vq;
      rd(16'h8000 | 16'(a), d);
      vi = int'($signed(d[27:14])); vq = int'($signed(d[13:0]));
      if (real'(vi * vi + vq * vq) > best) begin best = real'(vi * vi + vq * vq); i_at = real'(vi); q_at = real'(vq); end
      if ((vi < 0 ? -vi : vi) > max_i) max_i = (vi < 0 ? -vi : vi);
      if ((vq < 0 ? -vq : vq) > max_q) max_q = (vq < 0 ? -vq : vq);
    end
  endtask

  initial begin
    adc_a = 0; adc_b = 0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    wr(R_MOD_FREQ, 32'd295279001);            // 8.6 MHz
    wr(R_MOD_AMP, 32'd7782);
    for (int s = 0; s < 2; s++) begin          // 2 x first-order low-pass, pole 0.9
      wr(R_CHA_IIR + 16'(5*s) + 0, 32'd419430);
      wr(R_CHA_IIR + 16'(5*s) + 3, -32'sd3774874);
    end
    wr(R_DEST, {26'd0, DST_FAST_A, DST_FAST_B, DST_NONE});   // mod -> A, ramp -> B
    wr(R_RAMP_AMP, 32'd3000);
    wr(R_RAMP_STEP, 32'h0000_8000);
    wr(R_REC_DEC, 32'd2);
    wr(R_MODE, 32'b100100);                    // ramp runs, record on sweep start

    for (int trial = 0; trial < 3; trial++) begin
      real i0, q0, i1, q1, theta, mag0;
      int mi0, mq0, mi1, mq1;
      logic [31:0] delta;
      path_delay = 13 + 9 * trial;             // 13, 22, 31 clocks
      wr(R_CHA_DELAY, 32'd0);
      record(i0, q0, mi0, mq0);
      theta = $atan2(q0, i0);
      mag0 = $sqrt(i0 * i0 + q0 * q0);
      delta = 32'(longint'((theta / (2.0 * PI)) * 4294967296.0 + (theta < 0.0 ? 4294967296.0 : 0.0)));
      wr(R_CHA_DELAY, delta);
      record(i1, q1, mi1, mq1);
      n_corrections++;
      $display("path delay %0d clocks: before I=%0.0f Q=%0.0f (theta %0.1f deg, max|I| %0d max|Q| %0d); after max|I| %0d max|Q| %0d",
               path_delay, i0, q0, theta * 180.0 / PI, mi0, mq0, mi1, mq1);
      chk(mag0 > 1000.0, "line visible in the recording");
      chk(real'(mq1) < 0.05 * real'(mi1), "quadrature below 5% of in-phase after correction");
      chk(real'(mi1) > 0.9 * mag0, "in-phase peak carries the full I/Q magnitude");
      // the two lobes of a dispersive line are equal: the strongest may be on -I
      chk((q1 < 0.0 ? -q1 : q1) < 0.05 * (i1 < 0.0 ? -i1 : i1), "strongest sample now lies on the I axis");
    end
    chk(n_corrections > 0, "phase correction happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

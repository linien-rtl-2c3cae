// tb_demodulator: checks IQ demodulation at harmonics 1..5 with a demodulation
// phase. Every clock a random sample, oscillator phase, harmonic and phase
// offset are applied; STAGES+2 clocks later the outputs must equal
// I = K*s*cos(a), Q = -K*s*sin(a) with a = h*phase + delay (mod 2^32).
// A second part demodulates a synthetic 3f tone and checks that the mean of I
// follows cos of the phase difference.
module tb_demodulator;
  localparam int DW = 25, PW = 32, STAGES = 18, LAT = STAGES + 2;
  localparam real K = 1.64676025810509;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  logic signed [DW-1:0] sig_in, i_out, q_out;
  logic [PW-1:0] phase_in, delay_phase;
  logic [2:0] harmonic;
  int checks = 0, failures = 0;

  demodulator #(.DW(DW), .PHASE_W(PW), .STAGES(STAGES)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real hs [$], ha [$];

  initial begin
    sig_in = 0; phase_in = 0; delay_phase = 0; harmonic = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000 + LAT; n++) begin
      logic [PW-1:0] a;
      if (hs.size() == LAT) begin
        real s, ang, ei, eq, tol;
        s = hs.pop_front(); ang = ha.pop_front();
        ei = K * s * $cos(ang); eq = -K * s * $sin(ang);
        tol = 3.0e-5 * K * (s < 0 ? -s : s) + 24.0;
        checks++;
        if ((ei - real'(i_out)) > tol || (real'(i_out) - ei) > tol ||
            (eq - real'(q_out)) > tol || (real'(q_out) - eq) > tol) begin
          failures++;
          if (failures < 10) $display("n=%0d got (%0d,%0d) exp (%0f,%0f)", n, i_out, q_out, ei, eq);
        end
      end
      sig_in = DW'($signed($urandom_range(0, 16000000)) - 8000000);
      phase_in = $urandom; delay_phase = $urandom;
      harmonic = 3'($urandom_range(1, 5));
      a = PW'(harmonic) * phase_in + delay_phase;
      hs.push_back(real'(sig_in));
      ha.push_back(2.0 * PI * real'(a) / 4294967296.0);
      @(negedge clk);
    end
    // 3f tone with phase offset 60 degrees, demodulated at h=3 and delay 0 and 60 deg
    for (int pass = 0; pass < 2; pass++) begin
      real acc;
      logic [PW-1:0] ph;
      acc = 0; ph = 0;
      harmonic = 3;
      delay_phase = (pass == 0) ? 32'd0 : 32'd715827883;   // 60 deg
      for (int n = 0; n < 2000 + LAT; n++) begin
        ph = ph + 32'd123456789;
        phase_in = ph;
        sig_in = DW'($rtoi(1000000.0 * $cos(3.0 * 2.0 * PI * real'(ph) / 4294967296.0 + PI / 3.0)));
        @(negedge clk);
        if (n >= LAT) acc += real'(i_out);
      end
      acc = acc / 2000.0;
      // mean of K*A*cos(x+60)*cos(x+d) = K*A/2*cos(60-d)
      checks++;
      if ((acc - K * 500000.0 * $cos(PI / 3.0 - ((pass == 0) ? 0.0 : PI / 3.0))) > 20000.0 ||
          (acc - K * 500000.0 * $cos(PI / 3.0 - ((pass == 0) ? 0.0 : PI / 3.0))) < -20000.0) begin
        failures++;
        $display("3f mean I wrong: pass %0d mean %0f", pass, acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

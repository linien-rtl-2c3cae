// tb_mod_oscillator: checks the modulation NCO. The phase must advance by the
// frequency word every clock, and cos_out must be (2^24-1)*cos(2*pi*phase/2^32)
// of the phase STAGES+1 clocks earlier, within the CORDIC's accuracy. Runs at
// 8 MHz (the paper's initial optimisation value), 50 MHz (its highest
// modulation frequency) and a random frequency, switching frequency on the fly.
module tb_mod_oscillator;
  localparam int DW = 25, PW = 32, STAGES = 18, LAT = STAGES + 1;
  localparam real PI = 3.14159265358979;
  localparam real AMP = 16777215.0;

  logic clk = 0, rst_n = 0;
  logic [PW-1:0] freq_word, phase;
  logic signed [DW-1:0] cos_out;
  int checks = 0, failures = 0;

  mod_oscillator #(.DW(DW), .PHASE_W(PW), .STAGES(STAGES)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [PW-1:0] ph_hist [$];
  logic [PW-1:0] last_phase, last_word;

  initial begin
    logic [PW-1:0] words [3];
    words[0] = 32'd274877907;     // 8 MHz:  8e6/125e6 * 2^32
    words[1] = 32'd1717986918;    // 50 MHz
    words[2] = $urandom;
    freq_word = words[0];
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    last_phase = phase;
    last_word  = freq_word;
    for (int n = 0; n < 3000; n++) begin
      real e, d;
      ph_hist.push_back(phase);
      if (ph_hist.size() > LAT) begin
        e = AMP * $cos(2.0 * PI * real'(ph_hist.pop_front()) / 4294967296.0);
        d = e - real'(cos_out);
        checks++;
        if (d > 600.0 || d < -600.0) begin
          failures++;
          if (failures < 10) $display("cos mismatch n=%0d got %0d exp %0f", n, cos_out, e);
        end
      end
      freq_word = words[n / 1000];
      last_word = freq_word;
      @(negedge clk);
      checks++;
      if (phase != last_phase + last_word) begin
        failures++;
        if (failures < 10) $display("phase step wrong at n=%0d", n);
      end
      last_phase = phase;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

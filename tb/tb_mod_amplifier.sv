// tb_mod_amplifier: checks the modulation gain stage. For random sine samples
// and amplitudes the output one clock later must be
// saturate14((sig * amp) >> 24), computed here with 64-bit integers; a full-
// scale sine times the largest amplitude must reach, not exceed, the DAC range.
module tb_mod_amplifier;
  localparam int DW = 25, DAC_W = 14, AMP_W = 14;

  logic clk = 0, rst_n = 0;
  logic signed [DW-1:0] sig_in;
  logic [AMP_W-1:0] amp;
  logic signed [DAC_W-1:0] mod_out;
  int checks = 0, failures = 0;

  mod_amplifier #(.DW(DW), .DAC_W(DAC_W), .AMP_W(AMP_W)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_v;
    sig_in = 0; amp = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      sig_in = DW'($signed($urandom_range(0, 33554430)) - 16777215);
      amp    = AMP_W'($urandom);
      if (n == 0) begin sig_in = 25'sd16777215; amp = 14'd16383; end
      if (n == 1) begin sig_in = -25'sd16777215; amp = 14'd8191; end
      exp_v = (longint'(sig_in) * longint'(amp)) >>> 24;
      if (exp_v > 8191) exp_v = 8191;
      if (exp_v < -8192) exp_v = -8192;
      @(negedge clk);
      checks++;
      if (longint'(mod_out) != exp_v) begin
        failures++;
        if (failures < 10) $display("n=%0d sig=%0d amp=%0d got %0d exp %0d", n, sig_in, amp, mod_out, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

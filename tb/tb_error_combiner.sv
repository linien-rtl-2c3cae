// tb_error_combiner: checks the three error-signal sources one clock after the
// inputs: channel A alone, the Q1.14-weighted sum of both channels (with
// saturation), and fast mode passing the sign-extended ADC sample, which takes
// precedence over dual-channel mode.
module tb_error_combiner;
  localparam int DW = 25, ADC_W = 14, MIX_W = 16;

  logic clk = 0, rst_n = 0;
  logic signed [ADC_W-1:0] adc_a;
  logic signed [DW-1:0] err_a, err_b, err_out;
  logic fast_mode, dual_channel;
  logic signed [MIX_W-1:0] mix_a, mix_b;
  int checks = 0, failures = 0;
  int n_fast = 0, n_dual = 0, n_single = 0;

  error_combiner #(.DW(DW), .ADC_W(ADC_W), .MIX_W(MIX_W)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    adc_a = 0; err_a = 0; err_b = 0; fast_mode = 0; dual_channel = 0; mix_a = 0; mix_b = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      adc_a = ADC_W'($urandom);
      err_a = DW'($urandom); err_b = DW'($urandom);
      mix_a = MIX_W'($urandom); mix_b = MIX_W'($urandom);
      fast_mode = ($urandom_range(0, 2) == 0);
      dual_channel = 1'($urandom_range(0, 1));
      if (fast_mode) begin e = longint'(adc_a); n_fast++; end
      else if (dual_channel) begin
        e = (longint'(mix_a) * longint'(err_a) + longint'(mix_b) * longint'(err_b)) >>> 14;
        if (e > 16777215) e = 16777215;
        if (e < -16777216) e = -16777216;
        n_dual++;
      end else begin e = longint'(err_a); n_single++; end
      @(negedge clk);
      checks++;
      if (longint'(err_out) != e) begin
        failures++;
        if (failures < 10) $display("n=%0d f=%0b d=%0b got %0d exp %0d", n, fast_mode, dual_channel, err_out, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

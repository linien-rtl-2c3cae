// tb_delta_sigma_dac: checks the first-order delta-sigma modulator. For
// several levels the number of ones in 2^16 clocks must be the level itself
// (+-1), and in any window of 256 clocks it must be within 1 of level/256,
// which a first-order modulator guarantees and a plain PWM would not.
module tb_delta_sigma_dac;
  localparam int W = 16;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] din;
  logic dout;
  int checks = 0, failures = 0;

  delta_sigma_dac #(.W(W)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] levels [5];
    levels[0] = 16'd0; levels[1] = 16'd1000; levels[2] = 16'd32768;
    levels[3] = 16'd50001; levels[4] = 16'd65535;
    din = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (levels[k]) begin
      int ones, win;
      din = levels[k];
      repeat (2) @(negedge clk);
      ones = 0; win = 0;
      for (int n = 0; n < 65536; n++) begin
        @(negedge clk);
        ones += dout; win += dout;
        if (n % 256 == 255) begin
          real expw;
          expw = real'(din) / 256.0;
          checks++;
          if (real'(win) > expw + 1.0 || real'(win) < expw - 1.0) begin
            failures++;
            if (failures < 10) $display("level %0d window has %0d ones", din, win);
          end
          win = 0;
        end
      end
      checks++;
      if (ones > int'(din) + 1 || ones < int'(din) - 1) begin
        failures++;
        $display("level %0d: %0d ones in 65536", din, ones);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

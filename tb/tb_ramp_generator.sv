// tb_ramp_generator: checks the triangular sweep. With amplitude A and step S
// (16 fractional bits) the position must move S per clock, turn at +-A, pulse
// sweep_start exactly at each lower turning point, have a period of
// 4*A*2^16/S clocks, and output center+pos. Hold must freeze the position,
// and stopping the ramp must return it to the centre.
module tb_ramp_generator;
  localparam int DW = 25, FRAC = 16;

  logic clk = 0, rst_n = 0, run, hold;
  logic [31:0] step;
  logic signed [DW-1:0] amplitude, center, ramp_out, pos;
  logic rising, sweep_start;
  int checks = 0, failures = 0;

  ramp_generator #(.DW(DW), .FRAC(FRAC)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #800000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("fail: %s", what); end
  endtask

  initial begin
    longint m_acc;
    bit m_rise;
    int starts [$];
    run = 0; hold = 0; step = 0; amplitude = 0; center = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    amplitude = 25'sd1000; center = -25'sd300; step = 32'h0001_8000;  // 1.5 LSB / clock
    run = 1;
    m_acc = 0; m_rise = 1;
    for (int n = 0; n < 8000; n++) begin
      bit m_start;
      m_start = 0;
      if (hold && n >= 5000 && n < 5200) begin
        // frozen
      end else if (m_rise) begin
        if (m_acc + 98304 >= 1000 * 65536) begin m_acc = 1000 * 65536; m_rise = 0; end
        else m_acc += 98304;
      end else begin
        if (m_acc - 98304 <= -1000 * 65536) begin m_acc = -1000 * 65536; m_rise = 1; m_start = 1; end
        else m_acc -= 98304;
      end
      @(negedge clk);
      chk(longint'(pos) == (m_acc >>> 16), $sformatf("pos n=%0d got %0d exp %0d", n, pos, m_acc >>> 16));
      chk(ramp_out == pos + center, "ramp_out = center + pos");
      chk(rising == m_rise, "direction");
      chk(sweep_start == m_start, $sformatf("sweep_start n=%0d", n));
      if (sweep_start) starts.push_back(n);
      hold = (n >= 4999 && n < 5199);
    end
    // period = 4 * 1000 / 1.5 = 2666.7 clocks
    chk(starts.size() >= 2, "at least two sweeps");
    if (starts.size() >= 2) begin
      int p;
      p = starts[1] - starts[0];
      chk(p >= 2666 && p <= 2668, $sformatf("period %0d", p));
    end
    run = 0;
    @(negedge clk);
    chk(pos == 0 && rising, "stop returns to centre");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

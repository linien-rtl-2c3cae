// tb_pid_controller: checks the PID against an integer model written here:
// out = (kp*e)>>12 + I>>20 + (kd*(e - e_prev))>>8, I += ki*e with the
// integrator clamped to the 25-bit range (<<20) and the output saturated.
// Random errors and gains, a long constant error that winds the integrator
// into its limit, and disabling (which must clear output and integrator).
// Also checks the 2-clock latency.
module tb_pid_controller;
  localparam int DW = 25, KW = 16;

  logic clk = 0, rst_n = 0, enable;
  logic signed [DW-1:0] err_in, ctrl_out;
  logic signed [KW-1:0] kp, ki, kd;
  int checks = 0, failures = 0;

  pid_controller #(.DW(DW), .KW(KW)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint m_e_prev, m_integ;
  longint q [$];
  localparam longint IMAX = 64'sd16777215 <<< 20;
  localparam longint IMIN = -(64'sd16777216 <<< 20);

  function automatic longint model(longint e, bit en);
    longint p, i, d, o;
    if (!en) begin m_e_prev = 0; m_integ = 0; return 0; end
    p = longint'(kp) * e;
    i = m_integ + longint'(ki) * e;
    if (i > IMAX) i = IMAX;
    if (i < IMIN) i = IMIN;
    d = longint'(kd) * (e - m_e_prev);
    o = (p >>> 12) + (i >>> 20) + (d >>> 8);
    if (o > 16777215) o = 16777215;
    if (o < -16777216) o = -16777216;
    m_integ = i; m_e_prev = e;
    return o;
  endfunction

  task automatic step(longint e, bit en);
    err_in = DW'(e); enable = en;
    q.push_back(model(e, en));
    @(negedge clk);
    if (q.size() > 1) begin
      longint x;
      x = q.pop_front();
      checks++;
      if (longint'(ctrl_out) != x) begin
        failures++;
        if (failures < 10) $display("got %0d exp %0d", ctrl_out, x);
      end
    end
  endtask

  initial begin
    enable = 0; err_in = 0; kp = 0; ki = 0; kd = 0;
    m_e_prev = 0; m_integ = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // latency: kp=4096 (gain 1), impulse
    kp = 16'sd4096;
    q.push_back(0);
    step(0, 1); step(5000, 1);
    checks++; if (ctrl_out == 25'sd5000) begin failures++; $display("latency < 2"); end
    step(0, 1);
    checks++; if (ctrl_out != 25'sd5000) begin failures++; $display("latency != 2: %0d", ctrl_out); end
    for (int n = 0; n < 3000; n++) begin
      if (n % 500 == 0) begin
        kp = KW'($urandom); ki = KW'($urandom_range(0, 2000)) - 16'sd1000; kd = KW'($urandom);
      end
      step(longint'($signed($urandom_range(0, 200000))) - 100000, (n % 700) < 650);
    end
    // wind-up into the integrator limit, then release
    kp = 0; kd = 0; ki = 16'sd30000;
    for (int n = 0; n < 2000; n++) step(8000000, 1);
    checks++;
    if (ctrl_out != 25'sd16777215) begin failures++; $display("integrator did not saturate: %0d", ctrl_out); end
    for (int n = 0; n < 50; n++) step(-8000000, 1);
    for (int n = 0; n < 5; n++) step(0, 0);
    checks++;
    if (ctrl_out != 0) begin failures++; $display("disable did not clear: %0d", ctrl_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_slow_integrator: checks the slow-output integrator against an integer
// model: preset to init while disabled, acc += ki*ctrl each clock, clamped to
// 0 .. (2^16-1)<<20, output acc>>20. Drives it to both rails and back.
module tb_slow_integrator;
  localparam int DW = 25, KW = 16, SW = 16;

  logic clk = 0, rst_n = 0, enable;
  logic signed [DW-1:0] ctrl_in;
  logic signed [KW-1:0] ki;
  logic [SW-1:0] init, slow_out;
  int checks = 0, failures = 0;
  int hit_top = 0, hit_bottom = 0;

  slow_integrator #(.DW(DW), .KW(KW), .SW(SW)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint m;
    enable = 0; ctrl_in = 0; ki = 0; init = 16'd32768;
    repeat (3) @(negedge clk);
    rst_n = 1;
    m = 0;
    for (int n = 0; n < 6000; n++) begin
      enable = (n % 2000) > 10;
      ki = 16'sd1000;
      ctrl_in = (n < 3000) ? DW'(200000 + $urandom_range(0, 1000)) : -DW'(150000 + $urandom_range(0, 1000));
      if (!enable) m = longint'(init) <<< 20;
      else begin
        m = m + longint'(ki) * longint'(ctrl_in);
        if (m < 0) m = 0;
        if (m > (longint'(65535) <<< 20)) m = longint'(65535) <<< 20;
      end
      @(negedge clk);
      checks++;
      if (longint'(slow_out) != (m >>> 20)) begin
        failures++;
        if (failures < 10) $display("n=%0d got %0d exp %0d", n, slow_out, m >>> 20);
      end
      if (slow_out == 16'hFFFF) hit_top++;
      if (slow_out == 0) hit_bottom++;
    end
    checks++;
    if (hit_top == 0 || hit_bottom == 0) begin failures++; $display("rails not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

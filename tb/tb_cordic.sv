// tb_cordic: checks the pipelined CORDIC rotator against floating-point
// rotation. Random vectors (including full-scale ones) and random 32-bit angles
// enter every clock; each output pair, STAGES+1 clocks later, must equal
// K*(x cos a - y sin a), K*(x sin a + y cos a) within the residual-angle error
// of 18 stages. Also checks the latency with an impulse after a quiet period.
module tb_cordic;
  localparam int DW = 25, AW = 32, STAGES = 18, LAT = STAGES + 1;
  localparam real K = 1.64676025810509;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  logic signed [DW-1:0] x_in, y_in, x_out, y_out;
  logic [AW-1:0] angle_in;
  int checks = 0, failures = 0;

  cordic #(.DW(DW), .AW(AW), .STAGES(STAGES)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real hx [$], hy [$], ha [$];

  task automatic check_out(real x, real y, real a);
    real ex, ey, tol;
    ex = K * (x * $cos(a) - y * $sin(a));
    ey = K * (x * $sin(a) + y * $cos(a));
    tol = 3.0e-5 * K * $sqrt(x*x + y*y) + 24.0;
    checks++;
    if ((ex - real'(x_out)) > tol || (real'(x_out) - ex) > tol ||
        (ey - real'(y_out)) > tol || (real'(y_out) - ey) > tol) begin
      failures++;
      if (failures < 10) $display("mismatch: in (%0f,%0f) a=%0f got (%0d,%0d) exp (%0f,%0f)",
                                  x, y, a, x_out, y_out, ex, ey);
    end
  endtask

  initial begin
    x_in = 0; y_in = 0; angle_in = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000 + LAT; n++) begin
      @(negedge clk);
      if (hx.size() == LAT) check_out(hx.pop_front(), hy.pop_front(), ha.pop_front());
      if (n < 2000) begin
        // amplitude kept so that K*|v| fits in DW bits
        x_in = DW'($signed($urandom_range(0, 2*6000000)) - 6000000);
        y_in = DW'($signed($urandom_range(0, 2*6000000)) - 6000000);
        if (n % 7 == 0) begin x_in = 10000000; y_in = 0; end
        angle_in = $urandom;
      end else begin
        x_in = 0; y_in = 0; angle_in = 0;
      end
      hx.push_back(real'(x_in)); hy.push_back(real'(y_in));
      ha.push_back(2.0 * PI * real'(angle_in) / 4294967296.0);
    end
    // latency: a single nonzero input must appear after exactly LAT clocks
    x_in = 1000000; y_in = 0; angle_in = 0;
    @(negedge clk);
    x_in = 0;
    for (int n = 1; n <= LAT + 2; n++) begin
      checks++;
      if ((n == LAT) != (x_out > 1000000)) begin
        failures++;
        $display("latency: cycle %0d x_out=%0d", n, x_out);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

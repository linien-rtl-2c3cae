// tb_iir_filter: checks the biquad against a bit-exact integer model written
// here (64-bit arithmetic, floor shift by 22, saturation to 25 bits, the
// saturated value fed back). Covers pass-through, a first-order low-pass,
// a resonant second-order section driven into saturation, and the 2-clock
// latency.
module tb_iir_filter;
  localparam int DW = 25, CW = 25, CF = 22;

  logic clk = 0, rst_n = 0;
  logic signed [DW-1:0] x_in, y_out;
  logic signed [CW-1:0] b0, b1, b2, a1, a2;
  int checks = 0, failures = 0;

  iir_filter #(.DW(DW), .CW(CW), .CF(CF)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint mx1, mx2, my1, my2;
  longint q [$];

  function automatic longint model_step(longint x);
    longint acc, y;
    acc = longint'(b0) * x + longint'(b1) * mx1 + longint'(b2) * mx2
        - longint'(a1) * my1 - longint'(a2) * my2;
    y = acc >>> CF;
    if (y > 16777215) y = 16777215;
    if (y < -16777216) y = -16777216;
    mx2 = mx1; mx1 = x; my2 = my1; my1 = y;
    return y;
  endfunction

  task automatic run_case(int n, int kind);
    for (int i = 0; i < n; i++) begin
      case (kind)
        0: x_in = DW'($signed($urandom_range(0, 20000000)) - 10000000);
        1: x_in = (i < 3) ? 25'sd1000000 : 25'sd0;
        default: x_in = (i % 50 < 25) ? 25'sd8000000 : -25'sd8000000;
      endcase
      q.push_back(model_step(longint'(x_in)));
      @(negedge clk);
      if (q.size() > 1) begin
        longint e;
        e = q.pop_front();
        checks++;
        if (longint'(y_out) != e) begin
          failures++;
          if (failures < 10) $display("kind %0d i=%0d got %0d exp %0d", kind, i, y_out, e);
        end
      end
    end
  endtask

  initial begin
    x_in = 0; b0 = 0; b1 = 0; b2 = 0; a1 = 0; a2 = 0;
    mx1 = 0; mx2 = 0; my1 = 0; my2 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    q.push_back(0);
    // pass-through
    b0 = 25'sd4194304;
    run_case(200, 0);
    // latency: with pass-through, an impulse appears after exactly 2 clocks
    x_in = 25'sd777; @(negedge clk); x_in = 0;
    checks++; if (y_out == 25'sd777) begin failures++; $display("latency too short"); end
    @(negedge clk);
    checks++; if (y_out != 25'sd777) begin failures++; $display("latency not 2: %0d", y_out); end
    repeat (3) @(negedge clk);
    mx1 = 0; mx2 = 0; my1 = 0; my2 = 0;
    q.delete(); q.push_back(0);
    // first-order low-pass: y = 0.01 x + 0.99 y[n-1]
    b0 = 25'sd41943; a1 = -25'sd4152361;
    run_case(1000, 0);
    run_case(300, 1);
    // resonant biquad, driven into saturation
    b0 = 25'sd419430; b1 = 25'sd838861; b2 = 25'sd419430;
    a1 = -25'sd7969177; a2 = 25'sd3984589;
    run_case(1500, 2);
    run_case(500, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

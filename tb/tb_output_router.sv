// tb_output_router: checks routing, summing and saturation for every
// combination of destinations of control, ramp and modulation: each fast DAC
// carries the saturated sum of what is sent to it, the slow output the slow
// integrator level plus 4x what is sent to it, clamped to 16 bits.
module tb_output_router;
  import linien_pkg::*;
  localparam int DWt = 25, DACW = 14, SWt = 16;

  logic clk = 0, rst_n = 0;
  logic signed [DWt-1:0] ctrl, ramp;
  logic signed [DACW-1:0] mod_sig, dac_a, dac_b;
  logic [SWt-1:0] slow_int, slow_out;
  dest_e ctrl_dst, ramp_dst, mod_dst;
  int checks = 0, failures = 0;

  output_router #(.DW(DWt), .DAC_W(DACW), .SW(SWt)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint clampl(longint v, longint lo, longint hi);
    return v < lo ? lo : (v > hi ? hi : v);
  endfunction

  initial begin
    ctrl = 0; ramp = 0; mod_sig = 0; slow_int = 0;
    ctrl_dst = DST_NONE; ramp_dst = DST_NONE; mod_dst = DST_NONE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      longint s [4];
      ctrl_dst = dest_e'(n % 4); ramp_dst = dest_e'((n / 4) % 4); mod_dst = dest_e'((n / 16) % 4);
      ctrl = (n % 3 == 0) ? DWt'($urandom) : DWt'($signed($urandom_range(0, 8000)) - 4000);
      ramp = DWt'($signed($urandom_range(0, 8000)) - 4000);
      mod_sig = DACW'($urandom);
      slow_int = SWt'($urandom);
      s = '{0, 0, 0, 0};
      s[ctrl_dst] += longint'(ctrl);
      s[ramp_dst] += longint'(ramp);
      s[mod_dst]  += longint'(mod_sig);
      @(negedge clk);
      checks++;
      if (longint'(dac_a) != clampl(s[1], -8192, 8191) ||
          longint'(dac_b) != clampl(s[2], -8192, 8191) ||
          longint'(slow_out) != clampl(longint'(slow_int) + 4 * s[3], 0, 65535)) begin
        failures++;
        if (failures < 10) $display("n=%0d got %0d %0d %0d", n, dac_a, dac_b, slow_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// output_router: sends the control, ramp and modulation signals to the
// outputs, adds what shares an output, and saturates.
//
// Each of ctrl_dst, ramp_dst, mod_dst names a destination (linien_pkg::dest_e):
// none, fast DAC A, fast DAC B, or the slow output. A fast DAC output is the
// sum of the signals sent to it, saturated to DAC_W bits (the DW-bit signals are
// in DAC LSB units, so no shift). The slow output is the slow integrator's
// level plus 4x the signed sum of signals sent to it (14-bit LSB to 16-bit
// LSB), clamped to 0..2^SW-1: this is how the ramp can drive a piezo from the
// slow pin. One register stage: latency 1 cycle.
// The paper says the output ports of these three signals are variable and
// draws the ramp added to the control signal; the encoding is this design's.
module output_router
  import linien_pkg::dest_e, linien_pkg::DST_FAST_A, linien_pkg::DST_FAST_B, linien_pkg::DST_SLOW;
#(
  parameter int DW    = 25,
  parameter int DAC_W = 14,
  parameter int SW    = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [DW-1:0]    ctrl,
  input  logic signed [DW-1:0]    ramp,
  input  logic signed [DAC_W-1:0] mod_sig,
  input  logic [SW-1:0]           slow_int,
  input  dest_e                   ctrl_dst,
  input  dest_e                   ramp_dst,
  input  dest_e                   mod_dst,
  output logic signed [DAC_W-1:0] dac_a,
  output logic signed [DAC_W-1:0] dac_b,
  output logic [SW-1:0]           slow_out
);
  localparam int TW = DW + 4;

  function automatic logic signed [TW-1:0] sum_for(input dest_e d,
      input logic signed [DW-1:0] c, input logic signed [DW-1:0] r,
      input logic signed [DAC_W-1:0] m, input dest_e cd, input dest_e rd, input dest_e md);
    logic signed [TW-1:0] s;
    s = '0;
    if (cd == d) s += TW'(c);
    if (rd == d) s += TW'(r);
    if (md == d) s += TW'(m);
    return s;
  endfunction

  function automatic logic signed [DAC_W-1:0] sat_dac(input logic signed [TW-1:0] v);
    if (v > TW'((1 <<< (DAC_W-1)) - 1)) return DAC_W'((1 <<< (DAC_W-1)) - 1);
    if (v < -TW'(1 <<< (DAC_W-1)))      return DAC_W'(-(1 <<< (DAC_W-1)));
    return v[DAC_W-1:0];
  endfunction

  logic signed [TW-1:0] sa, sb, ss;
  logic signed [TW+SW-1:0] slow_sum;

  always_comb begin
    sa = sum_for(DST_FAST_A, ctrl, ramp, mod_sig, ctrl_dst, ramp_dst, mod_dst);
    sb = sum_for(DST_FAST_B, ctrl, ramp, mod_sig, ctrl_dst, ramp_dst, mod_dst);
    ss = sum_for(DST_SLOW,   ctrl, ramp, mod_sig, ctrl_dst, ramp_dst, mod_dst);
    slow_sum = (TW+SW)'({1'b0, slow_int}) + ((TW+SW)'(ss) <<< 2);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dac_a <= '0; dac_b <= '0; slow_out <= '0;
    end else begin
      dac_a <= sat_dac(sa);
      dac_b <= sat_dac(sb);
      if (slow_sum < 0)                            slow_out <= '0;
      else if (slow_sum > (TW+SW)'((1 <<< SW) - 1)) slow_out <= '1;
      else                                         slow_out <= slow_sum[SW-1:0];
    end
  end
endmodule

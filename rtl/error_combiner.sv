// error_combiner: chooses what the PID controller sees as its error signal.
//
//   fast_mode = 1            : the raw ADC A sample, sign-extended to DW bits
//                              (demodulation and IIR filters are bypassed)
//   dual_channel = 1         : (mix_a*err_a + mix_b*err_b) >> 14, saturated,
//                              for combined FMS + MTS with both inputs demodulated
//   otherwise                : err_a, the filtered in-phase signal of channel A
//
// The weights are signed Q1.14 (16384 = 1.0). One register: latency 1 cycle.
// The paper gives the fast-mode bypass and dual-channel operation; the weighted
// sum is this design's choice for how the two channels are combined.
module error_combiner #(
  parameter int DW    = 25,
  parameter int ADC_W = 14,
  parameter int MIX_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ADC_W-1:0] adc_a,
  input  logic signed [DW-1:0]    err_a,
  input  logic signed [DW-1:0]    err_b,
  input  logic                    fast_mode,
  input  logic                    dual_channel,
  input  logic signed [MIX_W-1:0] mix_a,
  input  logic signed [MIX_W-1:0] mix_b,
  output logic signed [DW-1:0]    err_out
);
  localparam int PW = DW + MIX_W + 1;
  localparam logic signed [PW-1:0] MAXV = PW'((1 <<< (DW-1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(1 <<< (DW-1));

  logic signed [PW-1:0] mixed;
  logic signed [DW-1:0] mixed_sat;

  always_comb begin
    mixed = (PW'(mix_a) * PW'(err_a) + PW'(mix_b) * PW'(err_b)) >>> 14;
    if (mixed > MAXV)      mixed_sat = MAXV[DW-1:0];
    else if (mixed < MINV) mixed_sat = MINV[DW-1:0];
    else                   mixed_sat = mixed[DW-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n)            err_out <= '0;
    else if (fast_mode)    err_out <= DW'(adc_a);
    else if (dual_channel) err_out <= mixed_sat;
    else                   err_out <= err_a;
  end
endmodule

// mod_amplifier: the ".N" gain stage of the modulation path.
//
// Multiplies the nearly full-scale sine from the oscillator (peak 2^(DW-1)-1)
// by the unsigned amplitude `amp` and divides by 2^(DW-1), so the output peak
// is `amp` DAC LSB. The result saturates to the DAC_W-bit signed range.
// One register stage: latency 1 cycle. The paper names the block
// ("modulation amplification", drawn as a gain .N); the amplitude unit is this
// design's choice.
module mod_amplifier #(
  parameter int DW    = 25,
  parameter int DAC_W = 14,
  parameter int AMP_W = 14
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [DW-1:0]    sig_in,
  input  logic        [AMP_W-1:0] amp,
  output logic signed [DAC_W-1:0] mod_out
);
  localparam int PW = DW + AMP_W + 1;
  localparam logic signed [PW-1:0] MAXV = PW'((1 <<< (DAC_W-1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(1 <<< (DAC_W-1));

  logic signed [PW-1:0] prod, scaled;
  always_comb begin
    prod   = PW'(sig_in) * $signed({1'b0, amp});
    scaled = prod >>> (DW - 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)             mod_out <= '0;
    else if (scaled > MAXV) mod_out <= MAXV[DAC_W-1:0];
    else if (scaled < MINV) mod_out <= MINV[DAC_W-1:0];
    else                    mod_out <= scaled[DAC_W-1:0];
  end
endmodule

// mod_oscillator: the modulation source, a numerically controlled oscillator.
//
// A PHASE_W-bit phase accumulator advances by freq_word every 8 ns clock, so
// f_mod = freq_word * 125 MHz / 2^PHASE_W (50 MHz, the highest modulation
// frequency the paper quotes, is freq_word = 0.4 * 2^32). The accumulator phase
// drives a CORDIC that rotates the constant vector (X0, 0), giving a cosine of
// nearly full DW-bit amplitude: X0 is chosen as (2^(DW-1)-1)/K so that the CORDIC
// gain K brings the peak to 2^(DW-1)-1.
//
// Interface: `phase` is the accumulator itself and goes to the demodulators;
// `cos_out` is cos(2*pi*phase/2^PHASE_W) delayed by the CORDIC latency
// (STAGES+1 cycles). The fixed offset between the two is one more constant
// phase that the demodulation phase setting absorbs. The paper gives the
// function (a sinusoidal modulation up to 50 MHz); the NCO and the CORDIC-based
// sine are this design's choice.
module mod_oscillator #(
  parameter int DW      = 25,
  parameter int PHASE_W = 32,
  parameter int STAGES  = 18
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [PHASE_W-1:0]   freq_word,
  output logic [PHASE_W-1:0]   phase,
  output logic signed [DW-1:0] cos_out
);
  // 1/K for STAGES >= 12 is 0.6072529350 to ten digits
  localparam logic signed [DW-1:0] X0 =
      DW'(longint'(real'((longint'(1) <<< (DW-1)) - 1) * 0.6072529350));

  always_ff @(posedge clk) begin
    if (!rst_n) phase <= '0;
    else        phase <= phase + freq_word;
  end

  logic signed [DW-1:0] sin_unused;

  cordic #(.DW(DW), .AW(PHASE_W), .STAGES(STAGES)) u_cordic (
    .clk, .rst_n,
    .x_in(X0), .y_in('0), .angle_in(phase),
    .x_out(cos_out), .y_out(sin_unused)
  );
endmodule

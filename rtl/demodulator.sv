// demodulator: IQ demodulation of one input channel at the n-th harmonic of the
// modulation frequency (n = 1..5), using the CORDIC.
//
// The reference angle is  a = harmonic * phase_in + delay_phase  (mod 2^PHASE_W),
// where phase_in is the modulation oscillator's phase and delay_phase is the
// user's demodulation phase. Rotating the vector (s, 0) by -a yields
//   i_out =  K * s * cos(a)    (in-phase: the product of signal and reference)
//   q_out = -K * s * sin(a)    (quadrature)
// with K ~ 1.64676 the CORDIC gain. The products still carry the 2f terms; the
// IIR filters that follow remove them. Harmonic values 0, 6 and 7 act as 1.
//
// Timing: one register forms the angle, then the CORDIC: latency STAGES+2
// cycles, one sample per clock. The paper gives the use of CORDIC, the harmonic
// range and the phase setting ("delay" in its block diagram); modelling that
// delay as a phase offset is this design's choice.
module demodulator #(
  parameter int DW      = 25,
  parameter int PHASE_W = 32,
  parameter int STAGES  = 18
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [DW-1:0] sig_in,
  input  logic [PHASE_W-1:0]   phase_in,
  input  logic [2:0]           harmonic,
  input  logic [PHASE_W-1:0]   delay_phase,
  output logic signed [DW-1:0] i_out,
  output logic signed [DW-1:0] q_out
);
  logic [2:0]           h;
  logic [PHASE_W-1:0]   angle;
  logic signed [DW-1:0] sig_d;

  assign h = (harmonic == 3'd0 || harmonic > 3'd5) ? 3'd1 : harmonic;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      angle <= '0;
      sig_d <= '0;
    end else begin
      angle <= PHASE_W'(-(PHASE_W'(h) * phase_in + delay_phase));
      sig_d <= sig_in;
    end
  end

  cordic #(.DW(DW), .AW(PHASE_W), .STAGES(STAGES)) u_cordic (
    .clk, .rst_n,
    .x_in(sig_d), .y_in('0), .angle_in(angle),
    .x_out(i_out), .y_out(q_out)
  );
endmodule

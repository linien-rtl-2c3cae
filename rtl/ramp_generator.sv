// ramp_generator: triangular sweep that scans the laser over the spectrum.
//
// A position accumulator with FRAC fractional bits moves by `step` per clock
// between -amplitude and +amplitude (DW-bit integer units), turning at both
// ends. `ramp_out` = center + position, saturated to DW bits; `pos` is the
// position alone (what the autolock compares against). `rising` is high on
// the upward half, and `sweep_start` pulses for one cycle at the lower turning
// point, where each recorded spectrum begins. A sweep period lasts
// 4*amplitude*2^FRAC/step clocks.
//
// `hold` freezes the position (used while locked: the lock engages at the
// current ramp position and the ramp stays there as an offset). With run and
// hold both low the position returns to 0 (the centre).
//
// Timing: outputs follow the registered accumulator, one step per cycle. The
// paper gives the triangular ramp and that the lock starts at a ramp position;
// the arithmetic, hold behaviour and interface are this design's.
module ramp_generator #(
  parameter int DW   = 25,
  parameter int FRAC = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 run,
  input  logic                 hold,
  input  logic [31:0]          step,
  input  logic signed [DW-1:0] amplitude,
  input  logic signed [DW-1:0] center,
  output logic signed [DW-1:0] ramp_out,
  output logic signed [DW-1:0] pos,
  output logic                 rising,
  output logic                 sweep_start
);
  localparam int AW = DW + FRAC + 2;
  logic signed [AW-1:0] acc, top, nxt;
  logic signed [DW+1:0] outsum;

  always_comb begin
    top = AW'(amplitude) <<< FRAC;
    nxt = rising ? acc + AW'({1'b0, step}) : acc - AW'({1'b0, step});
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc <= '0; rising <= 1'b1; sweep_start <= 1'b0;
    end else begin
      sweep_start <= 1'b0;
      if (hold) begin
        acc <= acc;
      end else if (!run) begin
        acc <= '0; rising <= 1'b1;
      end else if (rising) begin
        if (nxt >= top) begin acc <= top; rising <= 1'b0; end
        else acc <= nxt;
      end else begin
        if (nxt <= -top) begin acc <= -top; rising <= 1'b1; sweep_start <= 1'b1; end
        else acc <= nxt;
      end
    end
  end

  always_comb begin
    pos = DW'(acc >>> FRAC);
    outsum = (DW+2)'(center) + (DW+2)'(pos);
    if (outsum > (DW+2)'((1 <<< (DW-1)) - 1))  ramp_out = DW'((1 <<< (DW-1)) - 1);
    else if (outsum < -(DW+2)'(1 <<< (DW-1))) ramp_out = DW'(-(1 <<< (DW-1)));
    else                                       ramp_out = outsum[DW-1:0];
  end
endmodule

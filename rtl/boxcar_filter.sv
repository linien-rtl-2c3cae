// boxcar_filter: moving sum over the last `width` samples, the noise filter of
// the jitter tolerant autolock:
//
//   sum_out = x[n] + x[n-1] + ... + x[n-width+1]
//
// This is W times the filtered spectrum S_filtered(r) = 1/W * integral over
// [r-W, r] of S_raw; the 1/W is left out, so thresholds compared with this sum
// are given in sum units (W times the signal level). A sample enters only when
// `en` is high, which lets the filter run on a decimated stream for slow ramps.
//
// Implementation: a DEPTH-entry circular buffer holds the recent samples; on
// each new sample the one that leaves the window is read back and subtracted
// (running sum = previous sum + newest - oldest). Until `width` samples have
// arrived after `clear`, nothing is subtracted. width must be 1..DEPTH;
// changing it requires a `clear`.
//
// Timing: sum_out includes a sample 2 clocks after the cycle it is presented
// with en high; one sample per clock at most. The paper gives Eq. (1); the
// circular-buffer structure and DEPTH are this design's choice.
module boxcar_filter #(
  parameter int DW    = 25,
  parameter int DEPTH = 8192,
  localparam int AB   = $clog2(DEPTH),
  localparam int OW   = DW + AB
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 en,
  input  logic signed [DW-1:0] x_in,
  input  logic [AB:0]          width,
  output logic signed [OW-1:0] sum_out
);
  logic signed [DW-1:0] mem [DEPTH];
  logic [AB-1:0]        wptr;
  logic [AB:0]          count;          // samples written since clear, saturating
  logic signed [DW-1:0] oldest, x_d;
  logic                 en_d, old_valid;

  always_ff @(posedge clk) begin
    if (en) begin
      mem[wptr] <= x_in;
      oldest    <= mem[wptr - AB'(width)];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      wptr <= '0; count <= '0; en_d <= 1'b0; old_valid <= 1'b0; x_d <= '0; sum_out <= '0;
    end else begin
      en_d <= en;
      if (en) begin
        wptr      <= wptr + 1'b1;
        x_d       <= x_in;
        old_valid <= count >= width;
        if (count != (AB+1)'(DEPTH)) count <= count + 1'b1;
      end
      if (en_d)
        sum_out <= sum_out + OW'(x_d) - (old_valid ? OW'(oldest) : OW'(0));
    end
  end
endmodule

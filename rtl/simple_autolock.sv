// simple_autolock: the FPGA half of the simple autolock.
//
// The CPU compares a freshly recorded spectrum with the reference, computes at
// which ramp position the target line now sits, writes it to `target` and
// pulses `arm`. From then on, the first time the rising ramp crosses that
// position (pos goes from below target to at-or-above it while rising),
// `engage` pulses for one cycle and the block disarms. `cancel` disarms it.
// Registered: engage comes one cycle after the crossing sample. The paper
// gives the function; the rising-slope-only rule is this design's choice.
module simple_autolock #(
  parameter int DW = 25
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 arm,
  input  logic                 cancel,
  input  logic signed [DW-1:0] pos,
  input  logic                 rising,
  input  logic signed [DW-1:0] target,
  output logic                 engage,
  output logic                 busy
);
  logic signed [DW-1:0] pos_prev;
  logic                 prev_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; engage <= 1'b0; pos_prev <= '0; prev_valid <= 1'b0;
    end else begin
      engage   <= 1'b0;
      pos_prev <= pos;
      if (cancel) begin
        busy <= 1'b0;
      end else if (arm) begin
        busy <= 1'b1; prev_valid <= 1'b0;
      end else if (busy) begin
        prev_valid <= rising;
        if (prev_valid && rising && pos_prev < target && pos >= target) begin
          engage <= 1'b1;
          busy   <= 1'b0;
        end
      end
    end
  end
endmodule

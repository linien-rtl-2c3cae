// cordic: pipelined CORDIC vector rotator (rotation mode).
//
// Rotates the vector (x_in, y_in) by angle_in, where a full turn is 2^AW:
//   x_out = K * (x*cos(a) - y*sin(a)),  y_out = K * (x*sin(a) + y*cos(a)),
// with the CORDIC gain K = prod sqrt(1 + 2^-2i), about 1.64676 for 18 stages.
// The gain is not compensated here; callers scale their inputs or absorb it in
// later gains. A first stage folds angles beyond +-90 degrees by negating the
// vector, then STAGES shift-and-add micro-rotations follow, each one register.
// Two guard bits keep the gain from overflowing; outputs saturate to DW bits.
//
// Timing: fully pipelined, one new vector per clock, latency STAGES+1 cycles.
// The paper states only that demodulation uses the CORDIC algorithm; the stage
// count, angle width and guard bits are this design's choice (18 stages bring
// demodulator plus the two IIR filters to the 24-cycle latency the paper's
// 320 ns / 125 ns figures imply).
module cordic #(
  parameter int DW     = 25,
  parameter int AW     = 32,   // angle width, at most 32
  parameter int STAGES = 18    // at most 24
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [DW-1:0] x_in,
  input  logic signed [DW-1:0] y_in,
  input  logic        [AW-1:0] angle_in,
  output logic signed [DW-1:0] x_out,
  output logic signed [DW-1:0] y_out
);
  localparam int IW = DW + 2;

  // atan(2^-i) as a fraction of a full turn, times 2^32
  localparam logic [31:0] ATAN [24] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756,
    32'd42667331,  32'd21354465,  32'd10679838,  32'd5340245,
    32'd2670163,   32'd1335087,   32'd667544,    32'd333772,
    32'd166886,    32'd83443,     32'd41722,     32'd20861,
    32'd10430,     32'd5215,      32'd2608,      32'd1304,
    32'd652,       32'd326,       32'd163,       32'd81};

  logic signed [IW-1:0] xs [STAGES+1];
  logic signed [IW-1:0] ys [STAGES+1];
  logic signed [AW-1:0] zs [STAGES+1];

  // stage 0: fold the angle into [-90, +90] degrees
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      xs[0] <= '0; ys[0] <= '0; zs[0] <= '0;
    end else if (angle_in[AW-1] ^ angle_in[AW-2]) begin
      xs[0] <= -IW'(x_in);
      ys[0] <= -IW'(y_in);
      zs[0] <= $signed(angle_in - {1'b1, {(AW-1){1'b0}}});
    end else begin
      xs[0] <= IW'(x_in);
      ys[0] <= IW'(y_in);
      zs[0] <= $signed(angle_in);
    end
  end

  for (genvar i = 0; i < STAGES; i++) begin : g_stage
    localparam logic signed [AW-1:0] A = AW'(ATAN[i] >> (32 - AW));
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        xs[i+1] <= '0; ys[i+1] <= '0; zs[i+1] <= '0;
      end else if (!zs[i][AW-1]) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - A;
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + A;
      end
    end
  end

  localparam logic signed [IW-1:0] MAXV = IW'((1 <<< (DW-1)) - 1);
  localparam logic signed [IW-1:0] MINV = -IW'(1 <<< (DW-1));

  function automatic logic signed [DW-1:0] sat(input logic signed [IW-1:0] v);
    if (v > MAXV) return MAXV[DW-1:0];
    if (v < MINV) return MINV[DW-1:0];
    return v[DW-1:0];
  endfunction

  assign x_out = sat(xs[STAGES]);
  assign y_out = sat(ys[STAGES]);
endmodule

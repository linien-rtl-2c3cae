// iir_filter: second-order IIR section (biquad), direct form I.
//
//   y[n] = ( b0*x[n] + b1*x[n-1] + b2*x[n-2] - a1*y[n-1] - a2*y[n-2] ) >> CF
//
// Coefficients are signed CW-bit numbers with CF fractional bits (default
// 25 bits with 22 fractional: range +-4, resolution 2.4e-7). Setting b2 = a2 = 0
// gives a first-order section; b0 = 2^CF and the rest 0 passes the signal
// through. The result is saturated to DW bits, and the saturated value is
// what is fed back.
//
// Timing: one sample per clock. The recursion closes in one cycle; an output
// register follows, so the latency is 2 cycles. The paper gives two IIR filters
// in series with user-defined parameters; the order, structure and number
// formats are this design's choice.
module iir_filter #(
  parameter int DW = 25,
  parameter int CW = 25,
  parameter int CF = 22
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [DW-1:0] x_in,
  input  logic signed [CW-1:0] b0,
  input  logic signed [CW-1:0] b1,
  input  logic signed [CW-1:0] b2,
  input  logic signed [CW-1:0] a1,
  input  logic signed [CW-1:0] a2,
  output logic signed [DW-1:0] y_out
);
  localparam int AW = DW + CW + 3;
  localparam logic signed [AW-1:0] MAXV = AW'((1 <<< (DW-1)) - 1);
  localparam logic signed [AW-1:0] MINV = -AW'(1 <<< (DW-1));

  logic signed [DW-1:0] x1, x2, y1, y2;
  logic signed [AW-1:0] acc, shifted;
  logic signed [DW-1:0] y_new;

  always_comb begin
    acc = AW'(b0) * AW'(x_in) + AW'(b1) * AW'(x1) + AW'(b2) * AW'(x2)
        - AW'(a1) * AW'(y1) - AW'(a2) * AW'(y2);
    shifted = acc >>> CF;
    if (shifted > MAXV)      y_new = MAXV[DW-1:0];
    else if (shifted < MINV) y_new = MINV[DW-1:0];
    else                     y_new = shifted[DW-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x1 <= '0; x2 <= '0; y1 <= '0; y2 <= '0; y_out <= '0;
    end else begin
      x1 <= x_in;
      x2 <= x1;
      y1 <= y_new;
      y2 <= y1;
      y_out <= y1;
    end
  end
endmodule

// delta_sigma_dac: first-order delta-sigma modulator for the slow analog pin.
//
// A W-bit accumulator adds the input level every clock; the carry out is the
// 1-bit output. The density of ones is din / 2^W, and the quantisation noise is
// pushed to high frequencies, so an external analog low-pass recovers the level.
// The output is registered (1 cycle). The paper specifies first-order
// delta-sigma modulation; the input width is this design's choice.
module delta_sigma_dac #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din,
  output logic         dout
);
  logic [W-1:0] acc;
  logic [W:0]   sum;

  assign sum = {1'b0, acc} + {1'b0, din};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc <= '0; dout <= 1'b0;
    end else begin
      acc  <= sum[W-1:0];
      dout <= sum[W];
    end
  end
endmodule

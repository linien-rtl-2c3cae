// slow_integrator: extra integrator of the control signal for the slow analog
// output (0 V .. 1.8 V), which widens the capture and control range.
//
//   acc[n] = clamp(acc[n-1] + ki * ctrl[n], 0, (2^SW-1) << 20),  slow_out = acc >> 20
//
// The output is an unsigned SW-bit level. While `enable` is low the
// accumulator is preset to init << 20, so integration starts from a chosen
// output voltage. One register stage: latency 1 cycle. The paper gives an
// additional integrator with configurable strength on the slow output; the
// width and scaling are this design's choice.
module slow_integrator #(
  parameter int DW = 25,
  parameter int KW = 16,
  parameter int SW = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 enable,
  input  logic signed [DW-1:0] ctrl_in,
  input  logic signed [KW-1:0] ki,
  input  logic [SW-1:0]        init,
  output logic [SW-1:0]        slow_out
);
  localparam int F  = 20;
  localparam int AW = SW + F + DW + KW;   // ample headroom for one step
  localparam logic signed [AW-1:0] ONE  = 1;
  localparam logic signed [AW-1:0] AMAX = ((ONE <<< SW) - ONE) <<< F;

  logic signed [AW-1:0] acc, nxt;

  always_comb nxt = acc + AW'(ki) * AW'(ctrl_in);

  always_ff @(posedge clk) begin
    if (!rst_n)         acc <= '0;
    else if (!enable)   acc <= AW'({1'b0, init}) <<< F;
    else if (nxt < 0)   acc <= '0;
    else if (nxt > AMAX) acc <= AMAX;
    else                acc <= nxt;
  end

  assign slow_out = SW'(acc >>> F);
endmodule

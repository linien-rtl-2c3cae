// pid_controller: proportional-integral-derivative filter of the error signal;
// its output is the control signal.
//
//   out = (kp*e[n]) >> 12  +  I[n] >> 20  +  (kd*(e[n]-e[n-1])) >> 8
//   I[n] = I[n-1] + ki*e[n]          (kept with 20 fractional bits)
//
// kp = 4096 is unit proportional gain; ki = 1 gives an integrator unity-gain
// frequency of 125 MHz / (2*pi*2^20) ~ 19 Hz, ki = 32767 about 620 kHz. The
// integrator saturates at the DW-bit range (anti-windup) and the output
// saturates to DW bits. While `enable` is low (not locked) the integrator and
// the output are held at zero, so the lock always starts from a clean state.
//
// Timing: stage 1 registers the three products, stage 2 the integrator and the
// sum: latency 2 cycles, one sample per clock. The paper gives a PID with
// user-defined coefficients; gain formats and anti-windup are this design's.
module pid_controller #(
  parameter int DW = 25,
  parameter int KW = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 enable,
  input  logic signed [DW-1:0] err_in,
  input  logic signed [KW-1:0] kp,
  input  logic signed [KW-1:0] ki,
  input  logic signed [KW-1:0] kd,
  output logic signed [DW-1:0] ctrl_out
);
  localparam int PF = 12, IF = 20, DF = 8;
  localparam int PW = DW + KW + 2;       // products
  localparam int IW = DW + IF + 2;       // integrator
  localparam int SWD = PW + 2;           // output sum

  localparam logic signed [IW-1:0] IMAX = IW'(((longint'(1) <<< (DW-1)) - 1) <<< IF);
  localparam logic signed [IW-1:0] IMIN = -IW'((longint'(1) <<< (DW-1)) <<< IF);
  localparam logic signed [SWD-1:0] OMAX = SWD'((1 <<< (DW-1)) - 1);
  localparam logic signed [SWD-1:0] OMIN = -SWD'(1 <<< (DW-1));

  logic signed [DW-1:0] e_prev;
  logic signed [PW-1:0] p_prod, i_prod, d_prod;
  logic signed [IW-1:0] integ, integ_next;
  logic signed [SWD-1:0] sum;
  logic                  en1;

  always_comb begin
    logic signed [IW:0] t;
    t = (IW+1)'(integ) + (IW+1)'(i_prod);
    if (t > (IW+1)'(IMAX))      integ_next = IMAX;
    else if (t < (IW+1)'(IMIN)) integ_next = IMIN;
    else                        integ_next = t[IW-1:0];
    sum = SWD'(p_prod >>> PF) + SWD'(integ_next >>> IF) + SWD'(d_prod >>> DF);
  end

  // stage 1: products; enable travels with the sample
  always_ff @(posedge clk) begin
    if (!rst_n || !enable) begin
      e_prev <= '0; p_prod <= '0; i_prod <= '0; d_prod <= '0; en1 <= 1'b0;
    end else begin
      e_prev <= err_in;
      p_prod <= PW'(kp) * PW'(err_in);
      i_prod <= PW'(ki) * PW'(err_in);
      d_prod <= PW'(kd) * (PW'(err_in) - PW'(e_prev));
      en1    <= 1'b1;
    end
  end

  // stage 2: integrator and output sum
  always_ff @(posedge clk) begin
    if (!rst_n || !en1) begin
      integ <= '0; ctrl_out <= '0;
    end else begin
      integ <= integ_next;
      if (sum > OMAX)      ctrl_out <= OMAX[DW-1:0];
      else if (sum < OMIN) ctrl_out <= OMIN[DW-1:0];
      else                 ctrl_out <= sum[DW-1:0];
    end
  end
endmodule

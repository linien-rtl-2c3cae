// sample_recorder: the capture memory through which spectra and error-signal
// traces reach the CPU.
//
// Records DEPTH (16384) pairs of samples of two DW-bit signals. With decimation
// D = 2^dec_log2 (dec_log2 clamped to 0..16), each stored sample is the mean of
// D consecutive input samples, so the recorder is also the anti-alias low-pass
// ahead of the sample-rate reduction used for the error-signal spectral density:
// chunks with increasing decimation cover lower and lower frequencies. Stored
// values are saturated to SW (14) bits, the converter's LSB unit.
//
// Control: `start` arms it; recording begins on the cycle after the first one with
// `trigger` high (tie it high for immediate capture, or to the ramp's sweep start to
// capture one spectrum), runs for DEPTH stored samples, then `done` rises and
// stays until the next `start`. The CPU reads address rd_addr; rd_data
// = {ch_a, ch_b} appears one clock later.
//
// The paper gives the 16384-sample depth, the chunked decimated recording and
// the low-pass before it; averaging as that low-pass, the 14-bit storage and
// the trigger rule are this design's choices.
module sample_recorder #(
  parameter int DW    = 25,
  parameter int DEPTH = 16384,
  parameter int SW    = 14,
  localparam int AB   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 trigger,
  input  logic [4:0]           dec_log2,
  input  logic signed [DW-1:0] ch_a,
  input  logic signed [DW-1:0] ch_b,
  input  logic [AB-1:0]        rd_addr,
  output logic [2*SW-1:0]      rd_data,
  output logic                 busy,
  output logic                 done
);
  localparam int MAXDEC = 16;
  localparam int AW = DW + MAXDEC + 1;

  typedef enum logic [1:0] {IDLE, ARMED, REC, FULL} state_e;
  state_e state;

  logic [2*SW-1:0]      mem [DEPTH];
  logic [AB-1:0]        waddr;
  logic [MAXDEC-1:0]    cnt;
  logic [4:0]           dec;
  logic signed [AW-1:0] acc_a, acc_b, sum_a, sum_b;
  logic                 last;

  assign dec  = (dec_log2 > 5'(MAXDEC)) ? 5'(MAXDEC) : dec_log2;
  assign last = (cnt == MAXDEC'((32'd1 << dec) - 1));

  function automatic logic [SW-1:0] sat(input logic signed [AW-1:0] v);
    if (v > AW'((1 <<< (SW-1)) - 1)) return SW'((1 <<< (SW-1)) - 1);
    if (v < -AW'(1 <<< (SW-1)))      return SW'(-(1 <<< (SW-1)));
    return v[SW-1:0];
  endfunction

  always_comb begin
    sum_a = acc_a + AW'(ch_a);
    sum_b = acc_b + AW'(ch_b);
  end

  always_ff @(posedge clk) begin
    if (state == REC && last)
      mem[waddr] <= {sat(sum_a >>> dec), sat(sum_b >>> dec)};
    rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE; waddr <= '0; cnt <= '0; acc_a <= '0; acc_b <= '0;
    end else if (start) begin
      state <= ARMED; waddr <= '0; cnt <= '0; acc_a <= '0; acc_b <= '0;
    end else begin
      case (state)
        ARMED: if (trigger) state <= REC;
        REC: begin
          if (last) begin
            cnt <= '0; acc_a <= '0; acc_b <= '0;
            waddr <= waddr + 1'b1;
            if (waddr == AB'(DEPTH - 1)) state <= FULL;
          end else begin
            cnt <= cnt + 1'b1; acc_a <= sum_a; acc_b <= sum_b;
          end
        end
        default: ;
      endcase
    end
  end

  assign busy = (state == ARMED) || (state == REC);
  assign done = (state == FULL);
endmodule

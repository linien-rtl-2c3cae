// jitter_tolerant_autolock: recognises the spectrum's features in real time
// while the ramp runs and engages the lock at the target line, with no CPU in
// the loop.
//
// The CPU, having analysed several recorded spectra, writes a list of
// instructions, one per characteristic peak of the boxcar-filtered spectrum:
//   thr  : peak threshold in boxcar-sum units; its sign is the peak's polarity
//          (thr >= 0: wait for sum > thr, thr < 0: wait for sum < thr)
//   wait : the least number of filter samples that must pass after the
//          previous peak (or after the sweep start) before this peak counts
// plus `final_wait`, the number of samples from the last peak to the lock
// point. Example: "after a peak above H1 and then, at least T samples later, a
// peak below H2, wait F samples and lock".
//
// Sequence: `arm` clears the filter and waits for `sweep_start` (the ramp's
// lower turning point). During the rising half of the sweep the instructions
// are matched in order; after the last one the final wait runs and `engage`
// pulses for one cycle, ending the search. If the ramp turns before that,
// the search waits for the next sweep start and begins again from the first
// instruction, so one noisy sweep costs only one sweep. `cancel` stops it.
// Instruction writes (instr_we) may happen at any time before arming.
//
// Timing: the filter sees one sample per `sample_en`; wait times count those
// samples. Thresholds are compared every clock against the running sum.
// The paper describes the filter, the peak-sequence description and the
// lock-on-the-fly behaviour; the instruction encoding, N_INSTR and the
// restart rule are this design's choices.
module jitter_tolerant_autolock #(
  parameter int DW      = 25,
  parameter int DEPTH   = 8192,
  parameter int N_INSTR = 32,
  localparam int AB     = $clog2(DEPTH),
  localparam int TW     = DW + AB,
  localparam int IB     = $clog2(N_INSTR)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 arm,
  input  logic                 cancel,
  input  logic                 sweep_start,
  input  logic                 rising,
  input  logic                 sample_en,
  input  logic signed [DW-1:0] sig_in,
  input  logic [AB:0]          width,
  input  logic [IB:0]          n_instr,
  input  logic                 instr_we,
  input  logic [IB-1:0]        instr_addr,
  input  logic signed [TW-1:0] instr_thr,
  input  logic [31:0]          instr_wait,
  input  logic [31:0]          final_wait,
  output logic                 engage,
  output logic                 busy,
  output logic [IB-1:0]        instr_idx,
  output logic signed [TW-1:0] filtered
);
  typedef enum logic [1:0] {IDLE, WAIT_SWEEP, SEARCH, FINAL} state_e;
  state_e state;

  logic signed [TW-1:0] thr_mem  [N_INSTR];
  logic [31:0]          wait_mem [N_INSTR];
  logic [31:0]          timer;
  logic [IB:0]          idx;
  logic signed [TW-1:0] thr_cur;
  logic [31:0]          wait_cur;
  logic                 hit;

  always_ff @(posedge clk) begin
    if (instr_we) begin
      thr_mem[instr_addr]  <= instr_thr;
      wait_mem[instr_addr] <= instr_wait;
    end
  end

  boxcar_filter #(.DW(DW), .DEPTH(DEPTH)) u_filter (
    .clk, .rst_n, .clear(arm), .en(sample_en), .x_in(sig_in), .width, .sum_out(filtered)
  );

  always_comb begin
    thr_cur  = thr_mem[idx[IB-1:0]];
    wait_cur = wait_mem[idx[IB-1:0]];
    hit = (timer >= wait_cur) &&
          (thr_cur[TW-1] ? (filtered < thr_cur) : (filtered > thr_cur));
  end

  always_ff @(posedge clk) begin
    if (!rst_n || cancel) begin
      state <= IDLE; idx <= '0; timer <= '0; engage <= 1'b0;
    end else begin
      engage <= 1'b0;
      if (sample_en && timer != '1) timer <= timer + 1'b1;
      case (state)
        IDLE: if (arm) state <= WAIT_SWEEP;
        WAIT_SWEEP: if (sweep_start) begin
          idx <= '0; timer <= '0;
          state <= (n_instr == '0) ? FINAL : SEARCH;
        end
        SEARCH: begin
          if (!rising) state <= WAIT_SWEEP;
          else if (hit) begin
            timer <= '0;
            if (idx + 1'b1 >= n_instr) state <= FINAL;
            else idx <= idx + 1'b1;
          end
        end
        FINAL: begin
          if (!rising) state <= WAIT_SWEEP;
          else if (timer >= final_wait) begin
            engage <= 1'b1;
            state  <= IDLE;
          end
        end
      endcase
    end
  end

  assign busy      = state != IDLE;
  assign instr_idx = idx[IB-1:0];
endmodule

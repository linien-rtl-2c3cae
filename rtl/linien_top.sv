// linien_top: FPGA signal path of a laser frequency stabiliser for spectroscopy
// locking on a 125 MS/s, 14-bit ADC/DAC board.
//
// Default signal flow (one sample per 8 ns clock):
//   ADC A -> demodulator (CORDIC, n-th harmonic, demodulation phase)
//         -> IIR -> IIR = error signal -> PID = control signal
//         -> + ramp -> fast DAC;     control signal -> slow integrator
//         -> first-order delta-sigma -> slow output pin
//   NCO -> CORDIC sine -> x amplitude -> fast DAC (modulation)
// Channel B has its own demodulator and IIR pair for dual-channel (FMS + MTS)
// operation; channel A's quadrature passes through an IIR pair with the same
// coefficients as the in-phase one, so the CPU can record I and Q and compute
// the best demodulation phase. Fast mode feeds ADC A straight to the PID.
//
// Locking: the `locked` flag enables the PID and slow integrator and freezes the
// ramp where it is. It is set by the simple autolock (ramp reaches a target
// position), by the jitter tolerant autolock (peak sequence recognised in the
// boxcar-filtered error signal), or by a direct lock command; it is cleared by
// the unlock command. The jitter tolerant autolock samples the error signal
// every al_decim+1 clocks.
//
// Latency from ADC pins to DAC pins through the FPGA: 5 clocks (40 ns) in fast
// mode, 29 clocks (232 ns) through demodulator and filters. The difference,
// 24 clocks = 192 ns, matches the 195 ns by which fast mode shortens the
// paper's measured 320 ns input-to-output delay; the converters' own delays
// make up the rest.
//
// The ADC samples are taken as two's complement and registered once; the DAC
// outputs are two's complement; slow_dac is the 1-bit delta-sigma stream. The
// register bus is described in csr_regs.
module linien_top
  import linien_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ADC_W-1:0] adc_a,
  input  logic signed [ADC_W-1:0] adc_b,
  output logic signed [DAC_W-1:0] dac_a,
  output logic signed [DAC_W-1:0] dac_b,
  output logic                    slow_dac,
  input  logic                    bus_we,
  input  logic                    bus_re,
  input  logic [15:0]             bus_addr,
  input  logic [31:0]             bus_wdata,
  output logic [31:0]             bus_rdata,
  output logic                    bus_ack
);
  localparam int TW = DW + $clog2(BOX_DEPTH);

  cfg_t    cfg;
  status_t status;

  // ---------------------------------------------------------------- registers
  logic [13:0] rec_raddr;
  logic [2*REC_SW-1:0] rec_rdata;
  logic cmd_autolock, cmd_unlock, cmd_record, cmd_lock_now;
  logic instr_we;
  logic [$clog2(N_INSTR)-1:0] instr_addr;
  logic signed [TW-1:0] instr_thr;
  logic [31:0] instr_wait;

  csr_regs u_csr (
    .clk, .rst_n, .bus_we, .bus_re, .bus_addr, .bus_wdata, .bus_rdata, .bus_ack,
    .cfg, .status, .rec_raddr, .rec_rdata,
    .cmd_autolock, .cmd_unlock, .cmd_record, .cmd_lock_now,
    .instr_we, .instr_addr, .instr_thr, .instr_wait
  );

  // ---------------------------------------------------------------- inputs
  logic signed [ADC_W-1:0] adc_a_q, adc_b_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin adc_a_q <= '0; adc_b_q <= '0; end
    else        begin adc_a_q <= adc_a; adc_b_q <= adc_b; end
  end

  // ---------------------------------------------------------------- modulation
  logic [PHASE_W-1:0] phase;
  sample_t            osc_cos;
  logic signed [DAC_W-1:0] mod_sig;

  mod_oscillator u_osc (.clk, .rst_n, .freq_word(cfg.mod_freq), .phase, .cos_out(osc_cos));
  mod_amplifier  u_amp (.clk, .rst_n, .sig_in(osc_cos), .amp(cfg.mod_amp), .mod_out(mod_sig));

  // ---------------------------------------------------------------- demodulation + filters
  sample_t i_a, q_a, i_b, q_b, i_a1, err_a, q_a1, quad_a, i_b1, err_b;

  demodulator u_demod_a (.clk, .rst_n, .sig_in(DW'(adc_a_q)), .phase_in(phase),
    .harmonic(cfg.cha.harmonic), .delay_phase(cfg.cha.delay_phase), .i_out(i_a), .q_out(q_a));
  demodulator u_demod_b (.clk, .rst_n, .sig_in(DW'(adc_b_q)), .phase_in(phase),
    .harmonic(cfg.chb.harmonic), .delay_phase(cfg.chb.delay_phase), .i_out(i_b), .q_out(q_b));

  iir_filter u_iir_a1 (.clk, .rst_n, .x_in(i_a), .b0(cfg.cha.iir1.b0), .b1(cfg.cha.iir1.b1),
    .b2(cfg.cha.iir1.b2), .a1(cfg.cha.iir1.a1), .a2(cfg.cha.iir1.a2), .y_out(i_a1));
  iir_filter u_iir_a2 (.clk, .rst_n, .x_in(i_a1), .b0(cfg.cha.iir2.b0), .b1(cfg.cha.iir2.b1),
    .b2(cfg.cha.iir2.b2), .a1(cfg.cha.iir2.a1), .a2(cfg.cha.iir2.a2), .y_out(err_a));
  iir_filter u_iir_q1 (.clk, .rst_n, .x_in(q_a), .b0(cfg.cha.iir1.b0), .b1(cfg.cha.iir1.b1),
    .b2(cfg.cha.iir1.b2), .a1(cfg.cha.iir1.a1), .a2(cfg.cha.iir1.a2), .y_out(q_a1));
  iir_filter u_iir_q2 (.clk, .rst_n, .x_in(q_a1), .b0(cfg.cha.iir2.b0), .b1(cfg.cha.iir2.b1),
    .b2(cfg.cha.iir2.b2), .a1(cfg.cha.iir2.a1), .a2(cfg.cha.iir2.a2), .y_out(quad_a));
  iir_filter u_iir_b1 (.clk, .rst_n, .x_in(i_b), .b0(cfg.chb.iir1.b0), .b1(cfg.chb.iir1.b1),
    .b2(cfg.chb.iir1.b2), .a1(cfg.chb.iir1.a1), .a2(cfg.chb.iir1.a2), .y_out(i_b1));
  iir_filter u_iir_b2 (.clk, .rst_n, .x_in(i_b1), .b0(cfg.chb.iir2.b0), .b1(cfg.chb.iir2.b1),
    .b2(cfg.chb.iir2.b2), .a1(cfg.chb.iir2.a1), .a2(cfg.chb.iir2.a2), .y_out(err_b));

  logic signed [DW-1:0] q_b_unused;
  assign q_b_unused = q_b;

  // ---------------------------------------------------------------- error signal, PID
  sample_t err, ctrl;
  logic    locked;

  error_combiner u_comb (.clk, .rst_n, .adc_a(adc_a_q), .err_a, .err_b,
    .fast_mode(cfg.fast_mode), .dual_channel(cfg.dual_channel),
    .mix_a(cfg.mix_a), .mix_b(cfg.mix_b), .err_out(err));

  pid_controller u_pid (.clk, .rst_n, .enable(locked), .err_in(err),
    .kp(cfg.kp), .ki(cfg.ki), .kd(cfg.kd), .ctrl_out(ctrl));

  // ---------------------------------------------------------------- ramp, outputs
  sample_t ramp, ramp_pos;
  logic    rising, sweep_start;
  logic [SW-1:0] slow_int, slow_level;

  ramp_generator u_ramp (.clk, .rst_n, .run(cfg.ramp_run), .hold(locked), .step(cfg.ramp_step),
    .amplitude(cfg.ramp_amp), .center(cfg.ramp_center), .ramp_out(ramp), .pos(ramp_pos),
    .rising, .sweep_start);

  slow_integrator u_slow (.clk, .rst_n, .enable(cfg.slow_en && locked), .ctrl_in(ctrl),
    .ki(cfg.slow_ki), .init(cfg.slow_init), .slow_out(slow_int));

  output_router u_router (.clk, .rst_n, .ctrl, .ramp, .mod_sig, .slow_int,
    .ctrl_dst(cfg.ctrl_dst), .ramp_dst(cfg.ramp_dst), .mod_dst(cfg.mod_dst),
    .dac_a, .dac_b, .slow_out(slow_level));

  delta_sigma_dac #(.W(SW)) u_dsm (.clk, .rst_n, .din(slow_level), .dout(slow_dac));

  // ---------------------------------------------------------------- autolock
  logic engage_simple, engage_jt, busy_simple, busy_jt;
  logic [15:0] decim_cnt;
  logic        al_sample;
  logic [$clog2(N_INSTR)-1:0] al_idx;

  always_ff @(posedge clk) begin
    if (!rst_n || decim_cnt >= cfg.al_decim) decim_cnt <= '0;
    else                                      decim_cnt <= decim_cnt + 1'b1;
  end
  assign al_sample = (decim_cnt >= cfg.al_decim);

  simple_autolock u_al_simple (.clk, .rst_n,
    .arm(cmd_autolock && cfg.al_mode == AL_SIMPLE), .cancel(cmd_unlock),
    .pos(ramp_pos), .rising, .target(cfg.al_target), .engage(engage_simple), .busy(busy_simple));

  // The boxcar sum (filtered) is an observation port for testbenches; the
  // processor sees the same shape in the recorded error signal, so it stays open.
  jitter_tolerant_autolock u_al_jt (.clk, .rst_n,
    .arm(cmd_autolock && cfg.al_mode == AL_JITTER_TOLERANT), .cancel(cmd_unlock),
    .sweep_start, .rising, .sample_en(al_sample), .sig_in(err),
    .width(cfg.al_width), .n_instr(cfg.al_n_instr),
    .instr_we, .instr_addr, .instr_thr, .instr_wait, .final_wait(cfg.al_final_wait),
    .engage(engage_jt), .busy(busy_jt), .instr_idx(al_idx), .filtered());

  always_ff @(posedge clk) begin
    if (!rst_n || cmd_unlock)                               locked <= 1'b0;
    else if (engage_simple || engage_jt || cmd_lock_now)    locked <= 1'b1;
  end

  // ---------------------------------------------------------------- recorder
  logic rec_busy, rec_done;
  sample_recorder u_rec (.clk, .rst_n, .start(cmd_record),
    .trigger(cfg.rec_on_sweep ? sweep_start : 1'b1), .dec_log2(cfg.rec_dec_log2),
    .ch_a(err), .ch_b(locked ? ctrl : quad_a),
    .rd_addr(rec_raddr), .rd_data(rec_rdata), .busy(rec_busy), .done(rec_done));

  always_comb begin
    status.locked   = locked;
    status.al_busy  = busy_simple || busy_jt;
    status.al_idx   = al_idx;
    status.rec_busy = rec_busy;
    status.rec_done = rec_done;
  end
endmodule

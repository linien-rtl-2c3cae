// csr_regs: control and status registers between the CPU and the signal path.
//
// Bus: a simple 32-bit word bus (16-bit word address). A write takes effect
// in the cycle bus_we is high. A read is requested with bus_re; one cycle
// later bus_ack pulses with bus_rdata. Addresses with bit 15 set read the
// capture memory (sample index = address[13:0]); the rest are registers, laid
// out in linien_pkg (R_*). Every configuration register reads back what was
// written; R_STATUS returns the live status word.
//
// The configuration is decoded combinationally from the register shadow into
// the cfg_t struct. Writes to R_CMD and R_INSTR_COMMIT are not stored: they
// produce one-cycle command pulses (start autolock, unlock, start recording,
// lock now) and the instruction-table write for the jitter tolerant autolock
// (the instruction index is the write data; threshold and wait come from
// R_INSTR_THR and R_INSTR_WAIT, the threshold sign-extended to 38 bits).
//
// Reset values give the default setup: first harmonic, IIR filters passing the
// signal through, OUT1 (fast A) carrying the modulation, OUT2 (fast B) carrying
// control signal plus ramp, slow output at mid-scale. The paper names the
// control and status registers; the bus protocol and the map are this design's.
module csr_regs
  import linien_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 bus_we,
  input  logic                 bus_re,
  input  logic [15:0]          bus_addr,
  input  logic [31:0]          bus_wdata,
  output logic [31:0]          bus_rdata,
  output logic                 bus_ack,
  output cfg_t                 cfg,
  input  status_t              status,
  output logic [13:0]          rec_raddr,
  input  logic [2*REC_SW-1:0]  rec_rdata,
  output logic                 cmd_autolock,
  output logic                 cmd_unlock,
  output logic                 cmd_record,
  output logic                 cmd_lock_now,
  output logic                 instr_we,
  output logic [$clog2(N_INSTR)-1:0] instr_addr,
  output logic signed [DW+$clog2(BOX_DEPTH)-1:0] instr_thr,
  output logic [31:0]          instr_wait
);
  localparam int NREG = 48;
  localparam logic signed [CW-1:0] UNITY = CW'(1 << 22);

  logic [31:0] regs [NREG];
  logic        ack_q, rec_sel_q;
  logic [31:0] rdata_q;

  function automatic biquad_t biquad(input int base, input logic [31:0] r [NREG]);
    biquad_t b;
    b.b0 = CW'(r[base]); b.b1 = CW'(r[base+1]); b.b2 = CW'(r[base+2]);
    b.a1 = CW'(r[base+3]); b.a2 = CW'(r[base+4]);
    return b;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NREG; i++) regs[i] <= '0;
      regs[6'(R_CHA_HARM)]  <= 32'd1;
      regs[6'(R_CHB_HARM)]  <= 32'd1;
      regs[6'(R_CHA_IIR)]   <= 32'(UNITY);
      regs[6'(R_CHA_IIR+5)] <= 32'(UNITY);
      regs[6'(R_CHB_IIR)]   <= 32'(UNITY);
      regs[6'(R_CHB_IIR+5)] <= 32'(UNITY);
      regs[6'(R_MIX)]       <= {16'd0, 16'd16384};
      regs[6'(R_SLOW_INIT)] <= 32'd32768;
      regs[6'(R_DEST)]      <= {26'd0, DST_FAST_A, DST_FAST_B, DST_FAST_B};
      regs[6'(R_AL_WIDTH)]  <= 32'd1;
    end else if (bus_we && !bus_addr[15] && bus_addr < 16'(NREG)
                 && bus_addr != R_CMD && bus_addr != R_INSTR_COMMIT && bus_addr != R_STATUS) begin
      regs[bus_addr[5:0]] <= bus_wdata;
    end
  end

  // command pulses
  always_comb begin
    logic wcmd;
    wcmd = bus_we && (bus_addr == R_CMD);
    cmd_autolock = wcmd && bus_wdata[0];
    cmd_unlock   = wcmd && bus_wdata[1];
    cmd_record   = wcmd && bus_wdata[2];
    cmd_lock_now = wcmd && bus_wdata[3];
    instr_we     = bus_we && (bus_addr == R_INSTR_COMMIT);
    instr_addr   = bus_wdata[$clog2(N_INSTR)-1:0];
    instr_thr    = (DW+$clog2(BOX_DEPTH))'($signed(regs[6'(R_INSTR_THR)]));
    instr_wait   = regs[6'(R_INSTR_WAIT)];
  end

  // reads
  assign rec_raddr = bus_addr[13:0];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ack_q <= 1'b0; rec_sel_q <= 1'b0; rdata_q <= '0;
    end else begin
      ack_q     <= bus_re;
      rec_sel_q <= bus_addr[15];
      if (bus_addr == R_STATUS)      rdata_q <= 32'(status);
      else if (bus_addr < 16'(NREG)) rdata_q <= regs[bus_addr[5:0]];
      else                           rdata_q <= '0;
    end
  end
  assign bus_ack   = ack_q;
  assign bus_rdata = rec_sel_q ? 32'(rec_rdata) : rdata_q;

  // configuration decode
  always_comb begin
    cfg = '0;
    cfg.mod_freq         = regs[6'(R_MOD_FREQ)];
    cfg.mod_amp          = DAC_W'(regs[6'(R_MOD_AMP)]);
    cfg.cha.harmonic     = regs[6'(R_CHA_HARM)][2:0];
    cfg.cha.delay_phase  = regs[6'(R_CHA_DELAY)];
    cfg.cha.iir1         = biquad(int'(R_CHA_IIR), regs);
    cfg.cha.iir2         = biquad(int'(R_CHA_IIR) + 5, regs);
    cfg.chb.harmonic     = regs[6'(R_CHB_HARM)][2:0];
    cfg.chb.delay_phase  = regs[6'(R_CHB_DELAY)];
    cfg.chb.iir1         = biquad(int'(R_CHB_IIR), regs);
    cfg.chb.iir2         = biquad(int'(R_CHB_IIR) + 5, regs);
    cfg.fast_mode        = regs[6'(R_MODE)][0];
    cfg.dual_channel     = regs[6'(R_MODE)][1];
    cfg.ramp_run         = regs[6'(R_MODE)][2];
    cfg.slow_en          = regs[6'(R_MODE)][3];
    cfg.al_mode          = autolock_mode_e'(regs[6'(R_MODE)][4]);
    cfg.rec_on_sweep     = regs[6'(R_MODE)][5];
    cfg.mix_a            = regs[6'(R_MIX)][15:0];
    cfg.mix_b            = regs[6'(R_MIX)][31:16];
    cfg.kp               = regs[6'(R_KP)][KW-1:0];
    cfg.ki               = regs[6'(R_KI)][KW-1:0];
    cfg.kd               = regs[6'(R_KD)][KW-1:0];
    cfg.ramp_step        = regs[6'(R_RAMP_STEP)];
    cfg.ramp_amp         = DW'(regs[6'(R_RAMP_AMP)]);
    cfg.ramp_center      = DW'(regs[6'(R_RAMP_CENTER)]);
    cfg.slow_ki          = regs[6'(R_SLOW_KI)][KW-1:0];
    cfg.slow_init        = regs[6'(R_SLOW_INIT)][SW-1:0];
    cfg.ctrl_dst         = dest_e'(regs[6'(R_DEST)][1:0]);
    cfg.ramp_dst         = dest_e'(regs[6'(R_DEST)][3:2]);
    cfg.mod_dst          = dest_e'(regs[6'(R_DEST)][5:4]);
    cfg.al_target        = DW'(regs[6'(R_AL_TARGET)]);
    cfg.al_width         = regs[6'(R_AL_WIDTH)][$clog2(BOX_DEPTH):0];
    cfg.al_n_instr       = regs[6'(R_AL_NINSTR)][$clog2(N_INSTR):0];
    cfg.al_final_wait    = regs[6'(R_AL_FINAL)];
    cfg.al_decim         = regs[6'(R_AL_DECIM)][15:0];
    cfg.rec_dec_log2     = regs[6'(R_REC_DEC)][4:0];
  end
endmodule

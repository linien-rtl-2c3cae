// linien_pkg: widths, types and the register map shared by the laser-lock
// signal path. All processing runs at one 125 MHz sample clock; every signal
// inside the path is a 25-bit two's-complement integer, with the 14-bit ADC
// samples sign-extended into its low bits and the DAC taking the low 14 bits
// after saturation. The 25-bit width, the 14-bit converters and the 16384-sample
// capture depth follow the paper; the phase width, register map and the
// coefficient formats are this design's own choices.
package linien_pkg;

  localparam int DW      = 25;    // datapath width
  localparam int ADC_W   = 14;    // converter width
  localparam int DAC_W   = 14;
  localparam int PHASE_W = 32;    // NCO phase, full turn = 2^32
  localparam int KW      = 16;    // PID / slow integrator gains
  localparam int CW      = 25;    // IIR coefficient width
  localparam int SW      = 16;    // slow output level
  localparam int MIX_W   = 16;    // dual-channel weights
  localparam int N_INSTR = 32;    // jitter tolerant autolock instructions
  localparam int BOX_DEPTH = 8192;// longest boxcar window
  localparam int REC_DEPTH = 16384;
  localparam int REC_SW  = 14;

  typedef logic signed [DW-1:0] sample_t;

  // where a routed signal goes
  typedef enum logic [1:0] {
    DST_NONE  = 2'd0,
    DST_FAST_A = 2'd1,
    DST_FAST_B = 2'd2,
    DST_SLOW  = 2'd3
  } dest_e;

  typedef enum logic {
    AL_SIMPLE = 1'b0,
    AL_JITTER_TOLERANT = 1'b1
  } autolock_mode_e;

  typedef struct packed {
    logic signed [CW-1:0] b0, b1, b2, a1, a2;
  } biquad_t;

  typedef struct packed {
    logic [2:0]          harmonic;
    logic [PHASE_W-1:0]  delay_phase;
    biquad_t             iir1, iir2;
  } chan_cfg_t;

  typedef struct packed {
    logic [PHASE_W-1:0]       mod_freq;
    logic [DAC_W-1:0]         mod_amp;
    chan_cfg_t                cha, chb;
    logic                     fast_mode;
    logic                     dual_channel;
    logic signed [MIX_W-1:0]  mix_a, mix_b;
    logic signed [KW-1:0]     kp, ki, kd;
    logic                     ramp_run;
    logic [31:0]              ramp_step;
    logic signed [DW-1:0]     ramp_amp, ramp_center;
    logic                     slow_en;
    logic signed [KW-1:0]     slow_ki;
    logic [SW-1:0]            slow_init;
    dest_e                    ctrl_dst, ramp_dst, mod_dst;
    autolock_mode_e           al_mode;
    logic signed [DW-1:0]     al_target;
    logic [$clog2(BOX_DEPTH):0] al_width;
    logic [$clog2(N_INSTR):0] al_n_instr;
    logic [31:0]              al_final_wait;
    logic [15:0]              al_decim;       // boxcar sample every al_decim+1 cycles
    logic [4:0]               rec_dec_log2;
    logic                     rec_on_sweep;   // wait for sweep start before recording
  } cfg_t;

  typedef struct packed {
    logic                     locked;
    logic                     al_busy;
    logic [$clog2(N_INSTR)-1:0] al_idx;
    logic                     rec_busy;
    logic                     rec_done;
  } status_t;

  // register map, word addresses on the CPU bus
  localparam logic [15:0] R_MOD_FREQ = 16'h000, R_MOD_AMP = 16'h001,
    R_CHA_HARM = 16'h002, R_CHA_DELAY = 16'h003, R_CHA_IIR = 16'h004,  // 10 regs: iir1 b0..a2, iir2 b0..a2
    R_CHB_HARM = 16'h00E, R_CHB_DELAY = 16'h00F, R_CHB_IIR = 16'h010,  // 10 regs
    R_MODE = 16'h01A,      // [0] fast_mode [1] dual_channel [2] ramp_run [3] slow_en [4] al_mode [5] rec_on_sweep
    R_MIX = 16'h01B,       // [15:0] mix_a [31:16] mix_b
    R_KP = 16'h01C, R_KI = 16'h01D, R_KD = 16'h01E,
    R_RAMP_STEP = 16'h01F, R_RAMP_AMP = 16'h020, R_RAMP_CENTER = 16'h021,
    R_SLOW_KI = 16'h022, R_SLOW_INIT = 16'h023,
    R_DEST = 16'h024,      // [1:0] ctrl [3:2] ramp [5:4] mod
    R_AL_TARGET = 16'h025, R_AL_WIDTH = 16'h026, R_AL_NINSTR = 16'h027,
    R_AL_FINAL = 16'h028, R_AL_DECIM = 16'h029, R_REC_DEC = 16'h02A,
    R_INSTR_THR = 16'h02B, // threshold staged for the next instruction write
    R_INSTR_WAIT = 16'h02C, // minimum wait staged for the next instruction write
    R_INSTR_COMMIT = 16'h02D, // write data = instruction index, stores the staged pair
    R_CMD = 16'h02E,       // write: [0] start autolock [1] unlock [2] start recording
    R_STATUS = 16'h02F;
  localparam logic [15:0] R_REC_BASE = 16'h8000; // recorder window, address bit 15 set

endpackage

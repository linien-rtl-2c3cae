// tb_csr_regs: checks the register bank through its bus: reset defaults,
// write then read back of every configuration register (ack one clock after
// the read request), decoding of fields into the configuration struct,
// one-cycle command pulses, the instruction-table write strobe with the
// staged threshold (sign-extended) and wait, the live status word, and reads
// of the capture-memory window (served here by a one-clock memory model).
module tb_csr_regs;
  import linien_pkg::*;

  logic clk = 0, rst_n = 0;
  logic bus_we, bus_re, bus_ack;
  logic [15:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  cfg_t cfg;
  status_t status;
  logic [13:0] rec_raddr;
  logic [2*REC_SW-1:0] rec_rdata;
  logic cmd_autolock, cmd_unlock, cmd_record, cmd_lock_now, instr_we;
  logic [$clog2(N_INSTR)-1:0] instr_addr;
  logic signed [DW+$clog2(BOX_DEPTH)-1:0] instr_thr;
  logic [31:0] instr_wait;
  int checks = 0, failures = 0;

  csr_regs dut (.*);

  always #4 clk = ~clk;

  // capture memory model: data = f(address), one clock latency
  always_ff @(posedge clk) rec_rdata <= {14'(rec_raddr * 3), 14'(~rec_raddr)};

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("fail: %s", what); end
  endtask

  task automatic wr(logic [15:0] a, logic [31:0] d);
    bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk);
    bus_we = 0;
  endtask

  task automatic rd(logic [15:0] a, output logic [31:0] d);
    bus_re = 1; bus_addr = a;
    @(negedge clk);
    bus_re = 0;
    chk(bus_ack, "ack one clock after read");
    d = bus_rdata;
    @(negedge clk);
    chk(!bus_ack, "ack is a pulse");
  endtask

  initial begin
    logic [31:0] d;
    logic [31:0] shadow [48];
    bus_we = 0; bus_re = 0; bus_addr = 0; bus_wdata = 0; status = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // defaults
    chk(cfg.cha.harmonic == 1 && cfg.chb.harmonic == 1, "default harmonic 1");
    chk(cfg.cha.iir1.b0 == 25'sd4194304 && cfg.cha.iir2.b0 == 25'sd4194304 && cfg.cha.iir1.a1 == 0, "IIR defaults pass through");
    chk(cfg.mod_dst == DST_FAST_A && cfg.ctrl_dst == DST_FAST_B && cfg.ramp_dst == DST_FAST_B, "default routing");
    chk(cfg.slow_init == 16'd32768 && cfg.mix_a == 16'sd16384, "default slow init and mix");
    // write and read back every plain register
    for (logic [15:0] a = 0; a < 48; a++) begin
      shadow[a[5:0]] = $urandom;
      if (a != R_CMD && a != R_INSTR_COMMIT && a != R_STATUS) wr(16'(a), shadow[a[5:0]]);
    end
    for (logic [15:0] a = 0; a < 48; a++) begin
      if (a == R_CMD || a == R_INSTR_COMMIT || a == R_STATUS) continue;
      rd(16'(a), d);
      chk(d == shadow[a[5:0]], $sformatf("readback reg %0d", a));
    end
    // field decode
    chk(cfg.mod_freq == shadow[6'(R_MOD_FREQ)], "mod_freq");
    chk(cfg.cha.delay_phase == shadow[6'(R_CHA_DELAY)], "cha delay");
    chk(cfg.chb.iir2.a2 == shadow[6'(R_CHB_IIR + 9)][24:0], "chb iir2 a2");
    chk(cfg.kp == shadow[6'(R_KP)][15:0] && cfg.kd == shadow[6'(R_KD)][15:0], "gains");
    chk(cfg.fast_mode == shadow[6'(R_MODE)][0] && cfg.al_mode == autolock_mode_e'(shadow[6'(R_MODE)][4]), "mode bits");
    chk(cfg.ramp_dst == dest_e'(shadow[6'(R_DEST)][3:2]), "ramp destination");
    chk(cfg.al_final_wait == shadow[6'(R_AL_FINAL)], "final wait");
    // command pulses
    bus_we = 1; bus_addr = R_CMD; bus_wdata = 32'b0101;
    #1;
    chk(cmd_autolock && !cmd_unlock && cmd_record && !cmd_lock_now, "command decode");
    @(negedge clk); bus_we = 0; #1;
    chk(!cmd_autolock && !cmd_record, "commands are pulses");
    // instruction write
    wr(R_INSTR_THR, -32'sd123456);
    wr(R_INSTR_WAIT, 32'd777);
    bus_we = 1; bus_addr = R_INSTR_COMMIT; bus_wdata = 32'd17;
    #1;
    chk(instr_we && instr_addr == 5'd17 && instr_thr == -38'sd123456 && instr_wait == 32'd777, "instruction write");
    @(negedge clk); bus_we = 0; #1;
    chk(!instr_we, "instruction strobe is a pulse");
    // status
    status.locked = 1; status.al_idx = 5'd9; status.rec_done = 1;
    rd(R_STATUS, d);
    chk(d == 32'(status), "status word");
    // capture window
    for (int a = 0; a < 20; a++) begin
      int addr;
      addr = $urandom_range(0, 16383);
      rd(16'h8000 | 16'(addr), d);
      chk(d == 32'({14'(addr * 3), 14'(~addr)}), $sformatf("capture read %0d", addr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

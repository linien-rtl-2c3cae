// tb_sample_recorder: records the full 16384-sample depth twice, first
// undecimated and then with decimation 2^3, waiting for a trigger pulse. The
// testbench keeps its own list of the mean of every 2^dec input samples
// (floor division, saturated to 14 bits) and reads the whole memory back
// through the one-clock read port. Also checks that nothing is recorded before
// the trigger and that `done` rises exactly 16384*2^dec clocks after it.
module tb_sample_recorder;
  localparam int DW = 25, DEPTH = 16384, SW = 14, AB = $clog2(DEPTH);

  logic clk = 0, rst_n = 0, start, trigger, busy, done;
  logic [4:0] dec_log2;
  logic signed [DW-1:0] ch_a, ch_b;
  logic [AB-1:0] rd_addr;
  logic [2*SW-1:0] rd_data;
  int checks = 0, failures = 0;

  sample_recorder #(.DW(DW), .DEPTH(DEPTH), .SW(SW)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat14(longint v);
    if (v > 8191) return 8191;
    if (v < -8192) return -8192;
    return int'(v);
  endfunction

  initial begin
    int dec_list [2];
    dec_list = '{0, 3};
    start = 0; trigger = 0; dec_log2 = 0; ch_a = 0; ch_b = 0; rd_addr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (dec_list[p]) begin
      int ea [$], eb [$];
      longint sa, sb;
      int cnt, cycles;
      ea.delete(); eb.delete();
      dec_log2 = 5'(dec_list[p]);
      start = 1; @(negedge clk); start = 0;
      // no trigger yet: stays armed
      repeat (100) begin
        ch_a = DW'($urandom); @(negedge clk);
      end
      checks++; if (!busy || done) begin failures++; $display("not waiting for trigger"); end
      trigger = 1; @(negedge clk); trigger = 0;
      sa = 0; sb = 0; cnt = 0; cycles = 0;
      while (!done && cycles < DEPTH * 8 + 10) begin
        // mostly small values, sometimes large ones that saturate
        ch_a = ($urandom_range(0, 99) == 0) ? DW'($urandom) : DW'($signed($urandom_range(0, 16000)) - 8000);
        ch_b = DW'($signed($urandom_range(0, 4000)) - 2000);
        sa += longint'(ch_a); sb += longint'(ch_b); cnt++;
        if (cnt == (1 << dec_list[p])) begin
          ea.push_back(sat14(sa >>> dec_list[p])); eb.push_back(sat14(sb >>> dec_list[p]));
          sa = 0; sb = 0; cnt = 0;
        end
        @(negedge clk);
        cycles++;
      end
      checks++;
      if (cycles != DEPTH * (1 << dec_list[p])) begin
        failures++; $display("done after %0d clocks", cycles);
      end
      for (int a = 0; a < DEPTH; a++) begin
        rd_addr = AB'(a);
        @(negedge clk);
        checks++;
        if (int'($signed(rd_data[2*SW-1:SW])) != ea[a] || int'($signed(rd_data[SW-1:0])) != eb[a]) begin
          failures++;
          if (failures < 10) $display("dec %0d addr %0d got %0d/%0d exp %0d/%0d", dec_list[p], a,
              $signed(rd_data[2*SW-1:SW]), $signed(rd_data[SW-1:0]), ea[a], eb[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_boxcar_filter: checks the moving sum of the jitter tolerant autolock's
// noise filter at its full depth (8192). Samples enter on a random strobe;
// two clocks after each one, sum_out must equal the sum of the last `width`
// samples (fewer right after a clear), computed here from a plain list. Widths
// 1, 37, 1000 and the full 8192 are used, each run past the buffer wrap.
module tb_boxcar_filter;
  localparam int DW = 25, DEPTH = 8192, AB = $clog2(DEPTH), OW = DW + AB;

  logic clk = 0, rst_n = 0, clear, en;
  logic signed [DW-1:0] x_in;
  logic [AB:0] width;
  logic signed [OW-1:0] sum_out;
  int checks = 0, failures = 0;

  boxcar_filter #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint hist [$];

  function automatic longint model_sum(int w);
    longint s;
    int n;
    s = 0;
    n = hist.size();
    for (int i = 0; i < w && i < n; i++) s += hist[n - 1 - i];
    return s;
  endfunction

  initial begin
    int widths [4];
    widths = '{1, 37, 1000, 8192};
    clear = 0; en = 0; x_in = 0; width = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (widths[k]) begin
      longint expected, running;
      width = (AB+1)'(widths[k]);
      clear = 1; @(negedge clk); clear = 0;
      hist.delete();
      expected = 0; running = 0;
      for (int n = 0; n < widths[k] + 3000; n++) begin
        en = ($urandom_range(0, 3) != 0);
        x_in = DW'($urandom);
        @(negedge clk);
        // sum_out now reflects all samples before this one
        checks++;
        if (longint'(sum_out) != expected) begin
          failures++;
          if (failures < 10) $display("w=%0d n=%0d got %0d exp %0d", widths[k], n, sum_out, expected);
        end
        if (en) begin
          hist.push_back(longint'(x_in));
          running += longint'(x_in);
          if (hist.size() > widths[k]) begin
            running -= hist[0];
            void'(hist.pop_front());
          end
        end
        expected = running;
      end
      en = 0;
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of lobe_filter: random samples through the S1-shaped core
// (m = n, weights 1 and 2) and the S2-shaped core (m = 4n, weights 2 and 1).
// Every output is compared with Eq. 1, evaluated directly on the sample
// history (samples before the start or a clear count as zero). n changes
// between runs with a clear. The output must be there right after the clock
// edge that takes its sample, and read 0 until the lobes are full.
module tb_lobe_filter;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [13:0] x;
  logic [4:0] n1;
  logic [6:0] n2;
  logic signed [27:0] y1, y2;
  int checks = 0, failures = 0;
  int hist[$];

  always #5 clk = ~clk;

  lobe_filter #(.X_W(14), .N_MAX(16), .M_MUL(1), .WS(1), .WM(2), .ACC_W(28)) dut1 (
    .clk, .rst_n, .clr, .n(n1), .x, .y(y1));
  lobe_filter #(.X_W(14), .N_MAX(64), .M_MUL(4), .WS(2), .WM(1), .ACC_W(28)) dut2 (
    .clk, .rst_n, .clr, .n(n2), .x, .y(y2));

  function automatic longint sumw(int i, int lo_back, int hi_back);
    // sum of hist[i-k] for k = lo_back..hi_back
    longint s = 0;
    for (int k = lo_back; k <= hi_back; k++) if (i - k >= 0) s += hist[i-k];
    return s;
  endfunction

  function automatic longint ref_h(int i, int n, int m, int ws, int wm);
    if (i + 1 < 2*n + m) return 0;   // output held until the lobes are full
    return ws*sumw(i, m+n, 2*n+m-1) - wm*sumw(i, n, m+n-1) + ws*sumw(i, 0, n-1);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = 0; n1 = 4; n2 = 8;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      // clear with the new n, then stream
      @(negedge clk);
      n1 = 5'(1 + $urandom_range(0, 15));
      n2 = 7'(1 + $urandom_range(0, 63));
      if (run == 0) begin n1 = 16; n2 = 64; end
      clr = 1; x = 0;
      @(negedge clk);
      clr = 0;
      hist.delete();
      for (int i = 0; i < 1200; i++) begin
        // baseline around 8000 with occasional large negative pulses
        x = 14'(8000 + $urandom_range(0, 40) - (($urandom_range(0, 30) == 0) ? 3000 : 0));
        hist.push_back(int'(x));
        @(negedge clk);
        checks++;
        if (y1 != 28'(ref_h(i, n1, n1, 1, 2))) begin
          failures++;
          if (failures < 5) $display("S1-shape mismatch run %0d i %0d n %0d: %0d vs %0d", run, i, n1, y1, ref_h(i, n1, n1, 1, 2));
        end
        checks++;
        if (y2 != 28'(ref_h(i, n2, 4*n2, 2, 1))) begin
          failures++;
          if (failures < 5) $display("S2-shape mismatch run %0d i %0d n %0d: %0d vs %0d", run, i, n2, y2, ref_h(i, n2, 4*n2, 2, 1));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

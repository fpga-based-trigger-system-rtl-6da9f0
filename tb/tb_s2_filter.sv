// Testbench of s2_filter. It feeds a noisy baseline with negative-going
// pulses (like the digitised PMT sums) and compares each output, one clock
// after the edge that takes it, with Eq. 1 evaluated on the sample history. The reference
// is shifted right by the truncation and clamped to 0..65535. It also checks
// that the peak response to a rectangular pulse of known area, placed in the
// main lobe, equals that area (the filter integrates), and that the baseline
// is removed (a flat input gives 0).
module tb_s2_filter;
  logic clk = 0, rst_n = 0;
  logic [13:0] x;
  logic [7-1:0] n;
  logic [2:0] trunc;
  logic [15:0] y;
  int checks = 0, failures = 0;
  int hist[$];

  always #5 clk = ~clk;

  s2_filter dut (.clk, .rst_n, .n, .trunc, .x, .y);

  function automatic longint sumw(int i, int lo_back, int hi_back);
    longint s = 0;
    for (int k = lo_back; k <= hi_back; k++) if (i - k >= 0) s += hist[i-k];
    return s;
  endfunction

  // Reference output for sample i: integer-weighted Eq. 1, scaled back, shifted, clamped.
  function automatic int ref_y(int i, int nn, int tr);
    longint h;
    int m;
    m = 4*nn;
    h = 2*sumw(i, m+nn, 2*nn+m-1) - 1*sumw(i, nn, m+nn-1) + 2*sumw(i, 0, nn-1);
    if (i + 1 < 2*nn + m) return 0;   // lobes not yet full
    h = h >>> (tr + 0);
    if (h < 0) return 0;
    if (h > 65535) return 65535;
    return int'(h);
  endfunction

  task automatic run(int nn, int tr, int len, bit rect);
    int peak = 0;
    int p0 = (2+4)*nn + 10;   // pulse start, after the lobes have filled
    @(negedge clk);
    n = 7'(nn); trunc = 3'(tr);
    hist.delete();
    @(negedge clk);   // the wrapper restarts the core on the change of n
    for (int i = 0; i < len + 1; i++) begin
      if (rect) x = (i >= p0 && i < p0 + 4*nn) ? 14'd7900 : 14'd8000;
      else      x = 14'(8000 + $urandom_range(0, 30) - (($urandom_range(0, 40) == 0) ? 2000 : 0));
      hist.push_back(int'(x));
      @(negedge clk);
      if (i >= 1) begin
        checks++;
        if (int'(y) != ref_y(i-1, nn, tr)) begin
          failures++;
          if (failures < 5) $display("mismatch n=%0d tr=%0d i=%0d: %0d vs %0d", nn, tr, i-2, y, ref_y(i-1, nn, tr));
        end
        if (int'(y) > peak) peak = int'(y);
      end
    end
    if (rect && tr == 0) begin
      // pulse of depth 100 over the whole main lobe: area 100*m (S1: A=1; S2: A=1)
      checks++;
      if (peak != 100*4*nn) begin
        failures++;
        $display("peak %0d, expected pulse area %0d (n=%0d)", peak, 100*4*nn, nn);
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = 14'd8000; n = 4; trunc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(4, 0, 200, 1);
    run(64, 0, 14*64+50, 1);
    run(1, 0, 100, 1);
    // flat baseline gives zero once the lobes are full
    run(3, 0, 100, 0);
    for (int k = 0; k < 6; k++) run($urandom_range(1, 64), $urandom_range(0, 6), 600, 0);
    run(64, 6, 800, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

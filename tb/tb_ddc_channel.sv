// Testbench of ddc_channel. A noisy baseline carries isolated S1-like pulses
// (narrow, negative) and S2-like pulses (a broad cluster of single-
// photoelectron spikes). The checks:
//   - s1_y and s2_y equal Eq. 1 with the S1 (A=1, B=0.5, m=n) and S2 (A=1,
//     B=2, m=4n) coefficients, one clock after the edge that takes the sample;
//   - each discriminator output equals (filter output > threshold) one clock
//     later;
//   - S1 Found equals the S1 crossing one clock later when the rule is off,
//     and the crossing D clocks earlier AND NOT an S2 crossing in the last
//     6*n2 + 1 clocks when it is on (D = 5*n2 - n1);
//   - an isolated S1 pulse produces S1 Found with the rule on.
module tb_ddc_channel;
  import lux_trig_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  ch_cfg_t cfg;
  logic [13:0] x;
  logic s1_raw, s1_found, s1_big, s2_found, s2_big;
  logic [15:0] s1_y, s2_y;
  int checks = 0, failures = 0;
  int hist[$];
  int r1[$], r2[$];
  bit raw_h[$], s2f_h[$];
  int n_s1f_isolated = 0;
  always #5 clk = ~clk;
  ddc_channel dut (.clk, .rst_n, .cfg, .s1_not_s2_en(en), .x, .s1_raw, .s1_found, .s1_big,
                   .s2_found, .s2_big, .s1_y, .s2_y);

  function automatic longint sumw(int i, int lo_back, int hi_back);
    longint s = 0;
    for (int k = lo_back; k <= hi_back; k++) if (i - k >= 0) s += hist[i-k];
    return s;
  endfunction
  function automatic int ref_y(int i, int nn, int mm, int ws, int wm, int sh);
    longint h;
    if (i + 1 < 2*nn + mm) return 0;
    h = ws*sumw(i, mm+nn, 2*nn+mm-1) - wm*sumw(i, nn, mm+nn-1) + ws*sumw(i, 0, nn-1);
    h = h >>> sh;
    if (h < 0) return 0;
    if (h > 65535) return 65535;
    return int'(h);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL %s", s); end
  endtask

  // any S2 crossing among clocks lo..hi
  function automatic bit s2_within(int lo, int hi);
    for (int j = (lo < 0 ? 0 : lo); j <= hi; j++) if (s2f_h[j]) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    int d, i, n1, n2;
    cfg = '0;
    cfg.s1_n = 4; cfg.s2_n = 16; cfg.s1_trunc = 0; cfg.s2_trunc = 1;
    cfg.s1_lo = 60; cfg.s1_hi = 600; cfg.s2_lo = 400; cfg.s2_hi = 3000;
    n1 = 4; n2 = 16;
    d = 5*n2 - n1;
    x = 8000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (i = 0; i < 4000; i++) begin
      int v, p;
      v = 8000 + $urandom_range(0, 8);
      p = i % 1000;
      en = (i >= 2000);
      // S1-like pulse at 200 and 1200 (large one at 1200), S2-like cluster from 500
      if (p >= 200 && p < 204) v -= (i < 1000 || i >= 2000 && i < 3000) ? 60 : 400;
      if (p >= 500 && p < 650 && (p % 5) < 2) v -= 50;
      x = 14'(v);
      hist.push_back(v);
      @(negedge clk);
      r1.push_back(ref_y(i, n1, n1, 1, 2, 1 + 0));
      r2.push_back(ref_y(i, n2, 4*n2, 2, 1, 1));
      if (i >= 1) begin
        chk(int'(s1_y) == r1[i-1], $sformatf("s1_y at %0d: %0d vs %0d", i-1, s1_y, r1[i-1]));
        chk(int'(s2_y) == r2[i-1], $sformatf("s2_y at %0d: %0d vs %0d", i-1, s2_y, r2[i-1]));
      end
      raw_h.push_back(s1_raw);
      s2f_h.push_back(s2_found);
      if (i >= 2) begin
        chk(s1_raw == (r1[i-2] > 60) && s1_big == (r1[i-2] > 600), $sformatf("S1 disc at %0d", i));
        chk(s2_found == (r2[i-2] > 400) && s2_big == (r2[i-2] > 3000), $sformatf("S2 disc at %0d", i));
      end
      if (i >= 3 && i < 2000)
        chk(s1_found == raw_h[i-1], $sformatf("S1 found, rule off, at %0d", i));
      if (i >= 2000 + d + 5)
        chk(s1_found == (raw_h[i-1-d] && !s2_within(i - 1 - 6*n2, i - 1)), $sformatf("S1 found, rule on, at %0d", i));
      if (i >= 2000 && (i % 1000) >= 200 && (i % 1000) < 450 && s1_found) n_s1f_isolated++;
    end
    chk(n_s1f_isolated > 0, "isolated S1 pulse found with the rule on");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

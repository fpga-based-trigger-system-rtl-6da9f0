// Testbench of hit_translator with the full 56-bit vectors. Random hit
// vectors, random bit-to-counter assignments (some bits disabled) and random
// thresholds. The counts and the global hit vector are compared with a direct
// count. Scan lengths of 16 (two boards) and 56 are used, and `done` must
// come exactly scan_len+1 clocks after `start`.
module tb_hit_translator;
  import lux_trig_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [5:0] scan_len;
  logic [55:0] s1_hv, s2_hv;
  logic [111:0][4:0] assign_cfg;
  logic [15:0][6:0] thr, counts;
  logic [15:0] ghv;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  hit_translator #(.NBITS(56), .NG(16), .CW(7)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int ec[16];
    bit [15:0] eg;
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      scan_len = (t % 2) ? 6'd56 : 6'd16;
      s1_hv = {$urandom, $urandom}; s2_hv = {$urandom, $urandom};
      for (int b = 0; b < 112; b++) assign_cfg[b] = {1'($urandom_range(0, 5) != 0), 4'($urandom)};
      if (t == 0) for (int b = 0; b < 112; b++) assign_cfg[b] = {1'b1, 4'd5};   // all into one counter
      for (int g = 0; g < 16; g++) thr[g] = 7'($urandom_range(0, 6));
      for (int g = 0; g < 16; g++) ec[g] = 0;
      for (int b = 0; b < scan_len; b++) begin
        if (s1_hv[b] && assign_cfg[b][4]) ec[assign_cfg[b][3:0]]++;
        if (s2_hv[b] && assign_cfg[56+b][4]) ec[assign_cfg[56+b][3:0]]++;
      end
      for (int g = 0; g < 16; g++) eg[g] = (thr[g] != 0) && (ec[g] >= thr[g]);
      start = 1; @(negedge clk); start = 0;
      n = 0;
      while (!done) begin @(negedge clk); n++; end
      checks += 3;
      if (n != scan_len + 1) begin failures++; $display("took %0d clocks for %0d bits", n, scan_len); end
      if (ghv != eg) begin failures++; $display("ghv %h expected %h", ghv, eg); end
      for (int g = 0; g < 16; g++) if (counts[g] != 7'(ec[g])) begin failures++; break; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of s1_not_s2. With the rule off, S1 Found must follow the S1
// crossing one clock later. With it on, S1 Found(t) must equal
// s1_hit(t - D) and not s2_hit(t), with D = 5*n2 - n1 (0 if
// negative), seen one clock later, and no S2 crossing may have occurred in
// the 6*n2 clocks before t. Both inputs are random bursts; several
// filter widths are tried, including D = 0 and the largest D.
module tb_s1_not_s2;
  logic clk = 0, rst_n = 0, en = 0, s1_hit = 0, s2_hit = 0, s1_found;
  logic [4:0] s1_n;
  logic [6:0] s2_n;
  int checks = 0, failures = 0;
  bit h1[$];
  always #5 clk = ~clk;
  s1_not_s2 dut (.clk, .rst_n, .en, .s1_n, .s2_n, .s1_hit, .s2_hit, .s1_found);
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic run(bit e, int n1, int n2, int len);
    int d;
    bit exp_f, s2_now;
    int last_s2;
    en = e; s1_n = 5'(n1); s2_n = 7'(n2);
    d = 5*n2 - n1;
    if (d < 0) d = 0;
    h1.delete();
    // clear history
    s1_hit = 0; s2_hit = 0;
    repeat (330) @(negedge clk);
    for (int i = 0; i < 330; i++) h1.push_back(0);
    last_s2 = -100000;
    for (int i = 0; i < len; i++) begin
      s1_hit = ($urandom_range(0, 9) < 3);
      s2_hit = ($urandom_range(0, 999) < 4);
      h1.push_back(s1_hit);
      s2_now = s2_hit;
      if (e) exp_f = h1[h1.size()-1-d] && !s2_now && (i - last_s2 >= 6*n2 + 1);
      else   exp_f = s1_hit;
      if (s2_now) last_s2 = i;
      @(negedge clk);
      checks++;
      if (s1_found != exp_f) begin
        failures++;
        if (failures < 5) $display("mismatch en=%0d n1=%0d n2=%0d i=%0d", e, n1, n2, i);
      end
    end
  endtask
  initial begin
    s1_n = 4; s2_n = 8;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0, 4, 31, 300);
    run(1, 4, 31, 3000);   // the panel's settings: D = 151
    run(1, 16, 2, 2000);   // D < 0 -> 0
    run(1, 1, 64, 4000);   // D = 319
    run(1, 7, 13, 3000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of max_detector: random per-board maxima, random sets of boards
// present and random allow masks. The index, value and accept flag must match
// a direct search (first of equal values wins), one clock after `start`.
module tb_max_detector;
  logic clk = 0, rst_n = 0, start = 0, done, max_ok;
  logic [6:0] present;
  logic [6:0][2:0] b_max_ch;
  logic [6:0][15:0] b_max_val;
  logic [55:0] allow;
  logic [5:0] max_idx;
  logic [15:0] max_val;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  max_detector #(.NB(7)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int ei, ev;
    bit eany;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      present = 7'($urandom); if (t % 10 == 0) present = 7'b0000011;
      for (int b = 0; b < 7; b++) begin
        b_max_ch[b] = 3'($urandom); b_max_val[b] = 16'($urandom_range(0, (t % 3 == 0) ? 3 : 60000));
      end
      allow = {$urandom, $urandom};
      ei = 0; ev = -1; eany = 0;
      for (int b = 0; b < 7; b++)
        if (present[b] && int'(b_max_val[b]) > ev) begin ev = b_max_val[b]; ei = b*8 + b_max_ch[b]; eany = 1; end
      start = 1; @(negedge clk); start = 0;
      checks++;
      if (!done || (eany && (max_idx != 6'(ei) || max_val != 16'(ev))) || max_ok != (eany && allow[ei])) begin
        failures++;
        if (failures < 5) $display("got %0d/%0d/%0d expected %0d/%0d", max_idx, max_val, max_ok, ei, ev);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

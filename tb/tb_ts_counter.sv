// Testbench of ts_counter: a 100 MHz DAQ clock against the 64 MHz trigger
// clock. After a clear, the timestamp read in the trigger domain must never
// decrease, and it may lag the true count by at most a few DAQ clocks. Two
// samples 64 trigger clocks (1 us) apart must differ by 100 counts, give or take the sampling jitter.
// A second clear must bring the count back near zero.
module tb_ts_counter;
  logic clk = 0, ts_clk = 0, rst_n = 0, ts_clr = 0;
  logic [47:0] ts;
  longint true_cnt = 0;
  int checks = 0, failures = 0;
  always #7.8125 clk = ~clk;     // 64 MHz
  always #5 ts_clk = ~ts_clk;    // 100 MHz
  ts_counter #(.TS_W(48)) dut (.ts_clk, .ts_clr, .clk, .rst_n, .ts);
  always @(posedge ts_clk) if (ts_clr) true_cnt <= 0; else if (rst_n) true_cnt <= true_cnt + 1;
  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    longint prev, a, b;
    #100 rst_n = 1;
    @(negedge ts_clk) ts_clr = 1;
    @(negedge ts_clk) ts_clr = 0;
    repeat (10) @(posedge clk);
    prev = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (longint'(ts) < prev || true_cnt - longint'(ts) > 6 || longint'(ts) > true_cnt) begin
        failures++;
        if (failures < 5) $display("ts %0d true %0d prev %0d", ts, true_cnt, prev);
      end
      prev = longint'(ts);
    end
    @(negedge clk) a = longint'(ts);
    repeat (64) @(negedge clk);
    b = longint'(ts);
    checks++;
    if (b - a < 96 || b - a > 104) begin failures++; $display("1 us = %0d counts", b - a); end
    @(negedge ts_clk) ts_clr = 1;
    @(negedge ts_clk) ts_clr = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (ts > 48'd10) begin failures++; $display("after clear %0d", ts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

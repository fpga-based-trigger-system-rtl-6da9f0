// Testbench of rate_meter with a 1000-clock period: random numbers of
// trigger pulses (of varying length) per period must be reported exactly at
// each period's end.
module tb_rate_meter;
  logic clk = 0, rst_n = 0, trig_in = 0, strobe;
  logic [31:0] rate;
  int checks = 0, failures = 0;
  int sent = 0;
  always #5 clk = ~clk;
  rate_meter #(.PERIOD(1000), .CNT_W(32)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    @(negedge clk); rst_n = 1;
    for (int p = 0; p < 8; p++) begin
      int k, t;
      k = $urandom_range(0, 60);
      t = 0;
      sent = 0;
      // k pulses of 1..4 clocks with gaps, well inside the period
      for (int i = 0; i < k; i++) begin
        int w;
        w = $urandom_range(1, 4);
        trig_in = 1; repeat (w) begin @(negedge clk); t++; end
        trig_in = 0; repeat (10) begin @(negedge clk); t++; end
        sent++;
      end
      while (!strobe) @(negedge clk);
      checks++;
      if (rate != 32'(sent)) begin failures++; $display("period %0d: %0d counted, %0d sent", p, rate, sent); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

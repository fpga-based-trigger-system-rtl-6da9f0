// Testbench of trigger_decision: all combinations of the inputs and the three
// options. The decision, the one-clock `done`, the DAQ pulse of TRIG_LEN
// clocks and the captured timestamp are checked against the rule.
module tb_trigger_decision;
  import lux_trig_pkg::*;
  logic clk = 0, rst_n = 0, go = 0, tm_bit, max_ok, any_bad, all_ddc_map;
  dec_cfg_t cfg;
  logic [47:0] ts;
  logic done, trig, daq_trigger;
  logic [47:0] dec_ts;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  trigger_decision #(.TRIG_LEN(8)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    bit e;
    int w;
    ts = 48'h1234_0000_0000;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 128; c++) begin
      {cfg, tm_bit, max_ok, any_bad, all_ddc_map} = 7'(c);
      ts = ts + 48'd17;
      e = tm_bit && (max_ok || !cfg.use_max) && (!any_bad || !cfg.veto_bad) && (all_ddc_map || !cfg.need_ddc_map);
      go = 1; @(negedge clk); go = 0;
      checks += 2;
      if (!done || trig != e) begin failures++; $display("case %0d: trig %0d expected %0d", c, trig, e); end
      w = 0;
      while (daq_trigger) begin w++; @(negedge clk); end
      if (w != (e ? 8 : 0) || (e && dec_ts != ts)) begin failures++; $display("case %0d: pulse %0d clocks", c, w); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

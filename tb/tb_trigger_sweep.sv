// Testbench of trigger_sweep. Channel 5 of the S2 outputs carries a pulse
// train: every 20 clocks a pulse 10 clocks long, with heights cycling through
// 50, 150, 250, 350. The other outputs carry noise that must be ignored. A
// sweep of five thresholds 0, 100, .., 400 with a 400-clock dwell must count
// 20, 15, 10, 5 and 0 pulses. A second sweep on S1 channel 0 (flat) must count
// zero everywhere, and `done` must come after n_steps*dwell clocks.
module tb_trigger_sweep;
  import lux_trig_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0][15:0] s1_y, s2_y;
  logic start = 0, continuous = 0, sel_s2 = 0;
  logic [2:0] sel_ch = 0;
  logic [15:0] thr_start = 0, thr_step = 0;
  logic [8:0] n_steps = 0;
  logic [31:0] dwell = 0;
  logic [7:0] rd_addr = 0;
  logic [31:0] rd_data;
  logic busy, done;
  int checks = 0, failures = 0;
  int cyc = 0;
  always #5 clk = ~clk;
  trigger_sweep #(.NCH(8), .STEPS(256), .CNT_W(32)) dut (.*);

  always @(posedge clk) begin
    int ph, k;
    cyc <= cyc + 1;
    ph = (cyc + 1) % 20;
    k  = ((cyc + 1) / 20) % 4;
    for (int c = 0; c < 8; c++) begin
      s2_y[c] <= 16'($urandom_range(0, 500));
      s1_y[c] <= 16'd0;
    end
    s2_y[5] <= (ph < 10) ? 16'(50 + 100*k) : 16'd0;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sweep(bit s2, int ch, int exp_cnt[5]);
    int t0, t1;
    sel_s2 = s2; sel_ch = 3'(ch); thr_start = 0; thr_step = 100; n_steps = 5; dwell = 400;
    while (cyc % 20 != 14) @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    while (!done) @(negedge clk);
    t1 = cyc;
    checks++;
    if (t1 - t0 != 5*400) begin failures++; $display("sweep took %0d clocks", t1 - t0); end
    for (int k = 0; k < 5; k++) begin
      rd_addr = 8'(k);
      @(negedge clk); @(negedge clk);
      checks++;
      if (rd_data != 32'(exp_cnt[k])) begin
        failures++; $display("step %0d: %0d pulses, expected %0d", k, rd_data, exp_cnt[k]);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    sweep(1, 5, '{20, 15, 10, 5, 0});
    sweep(0, 0, '{0, 0, 0, 0, 0});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of one DDC-8DSP board (ddc8dsp) with its slow-link flags looped
// back, as when the board is alone on the Trigger Builder.
//
// Checks:
//   - standalone S2Mode: S2 pulses on two channels give a trigger pulse; a
//     single channel does not (the board map accepts >= 2 hit bits);
//   - an S2 above the upper threshold gives a bad_event and no trigger;
//   - connected mode: the board sends a record on its fast link with the
//     expected hit vector and maximum channel, waits for the builder's reply
//     and enters hold-off only when the reply says trigger;
//   - a threshold sweep started by the host completes.
module tb_ddc8dsp;
  import lux_trig_pkg::*;
  logic clk = 0, ts_clk = 0, rst_n = 0, ts_clr = 0;
  logic [7:0][13:0] adc;
  ch_cfg_t [7:0] ch_cfg;
  fsm_cfg_t fsm_cfg;
  logic tm_we = 0;
  logic [11:0] tm_waddr = 0;
  logic [15:0] tm_wdata = 0;
  sweep_cfg_t sweep_cfg;
  logic [31:0] sweep_data;
  logic sweep_busy, sweep_done;
  logic loc_s1_raw, loc_s1, loc_s2;
  fsm_state_e state;
  logic tb_done = 0, tb_trig = 0;
  logic [3:0] fast_lanes;
  logic trigger, bad_event, drift_timeout, quiet_restart;
  int dip[8];
  int checks = 0, failures = 0;
  int n_trig = 0, n_bad = 0, n_rec = 0;

  always #7.8125 clk = ~clk;
  always #5 ts_clk = ~ts_clk;

  ddc8dsp dut (.clk, .rst_n, .ts_clk, .ts_clr, .adc, .ch_cfg, .fsm_cfg, .tm_we, .tm_waddr, .tm_wdata,
               .sweep_cfg, .sweep_data, .sweep_busy, .sweep_done, .loc_s1_raw, .loc_s1, .loc_s2, .state,
               .g_s1_raw(loc_s1_raw), .g_s1(loc_s1), .g_s2(loc_s2), .tb_done, .tb_trig,
               .fast_lanes, .trigger, .bad_event, .drift_timeout, .quiet_restart);

  logic rv, rerr;
  ddc_rec_t rrec, last;
  fast_link_rx #(.PW(REC_W)) u_rx (.clk, .rst_n, .lanes(fast_lanes), .valid(rv), .err(rerr), .data(rrec));

  always_ff @(posedge clk)
    for (int c = 0; c < 8; c++) adc[c] <= 14'(8000 + $urandom_range(0, 3) - dip[c]);

  always @(posedge clk) if (rst_n) begin
    if (trigger) n_trig++;
    if (bad_event) n_bad++;
    if (rv) begin
      n_rec++; last <= rrec;
      checks++;
      if (rerr) begin failures++; $display("FAIL: fast link check error"); end
    end
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (t=%0t)", s, $time); end
  endtask
  task automatic s2_pulse(int c, int amp);
    fork begin dip[c] = amp; repeat (64) @(posedge clk); dip[c] = 0; end join_none
  endtask
  task automatic wait_armed();
    int n = 0;
    while (state != ST_ARMED && n < 3000) begin @(negedge clk); n++; end
    chk(state == ST_ARMED, "board armed");
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, b0, r0;
    for (int c = 0; c < 8; c++) begin
      dip[c] = 0;
      ch_cfg[c] = '0;
      ch_cfg[c].s1_n = 4;  ch_cfg[c].s2_n = 16; ch_cfg[c].s2_trunc = 2;
      ch_cfg[c].s1_lo = 100; ch_cfg[c].s1_hi = 5000;
      ch_cfg[c].s2_lo = 500; ch_cfg[c].s2_hi = 4000;
    end
    fsm_cfg = '0;
    fsm_cfg.mode = MODE_S2; fsm_cfg.quiet_us = 2; fsm_cfg.s1_cw = 16; fsm_cfg.s2_cw = 64;
    fsm_cfg.max_drift = 1000; fsm_cfg.holdoff_us = 4;
    sweep_cfg = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // board map: accept when at least two hit bits are set
    for (int w = 0; w < 4096; w++) begin
      @(negedge clk);
      tm_we = 1; tm_waddr = 12'(w);
      for (int k = 0; k < 16; k++) tm_wdata[k] = ($countones(w*16 + k) >= 2);
    end
    @(negedge clk) tm_we = 0;

    // standalone: two channels -> trigger
    wait_armed();
    s2_pulse(2, 100); s2_pulse(6, 100);
    repeat (400) @(negedge clk);
    chk(n_trig == 1, "standalone trigger from two S2 channels");
    chk(n_rec == 0, "no record sent when standalone");
    // one channel -> no trigger
    wait_armed();
    s2_pulse(3, 100);
    repeat (400) @(negedge clk);
    chk(n_trig == 1, "no trigger from one channel");
    // upper threshold -> bad event, no trigger
    wait_armed();
    s2_pulse(1, 600); s2_pulse(4, 100);
    repeat (400) @(negedge clk);
    chk(n_bad == 1, "bad event flagged");
    chk(n_trig == 1, "bad event not triggered");

    // connected: record and builder reply
    fsm_cfg.connected_tb = 1;
    wait_armed();
    r0 = n_rec;
    s2_pulse(0, 60); s2_pulse(5, 120);
    t = 0;
    while (n_rec == r0 && t < 600) begin @(negedge clk); t++; end
    @(negedge clk);
    chk(n_rec == r0 + 1, "record received");
    chk(last.s2_hv == 8'b0010_0001 && last.max_ch == 3'd5 && last.map_ok && !last.bad, "record contents");
    chk(state == ST_WAIT_TB, "waiting for the builder");
    repeat (20) @(negedge clk);
    chk(state == ST_WAIT_TB, "still waiting for the builder");
    tb_done = 1; tb_trig = 1; @(negedge clk); tb_done = 0; tb_trig = 0;
    @(negedge clk);
    chk(state == ST_HOLDOFF, "hold-off after the builder's trigger");
    // builder rejects: straight to quiet time
    wait_armed();
    r0 = n_rec;
    s2_pulse(0, 60); s2_pulse(5, 120);
    while (n_rec == r0) @(negedge clk);
    repeat (3) @(negedge clk);
    tb_done = 1; @(negedge clk); tb_done = 0;
    @(negedge clk);
    chk(state == ST_QUIET, "quiet time after the builder's rejection");
    chk(n_trig == 1, "no standalone trigger when connected");

    // threshold sweep
    sweep_cfg.sel_s2 = 1; sweep_cfg.sel_ch = 5; sweep_cfg.thr_start = 100; sweep_cfg.thr_step = 100;
    sweep_cfg.n_steps = 3; sweep_cfg.dwell = 300; sweep_cfg.start = 1;
    @(negedge clk) sweep_cfg.start = 0;
    t = 0;
    while (!sweep_done && t < 5000) begin @(negedge clk); t++; end
    chk(sweep_done, "sweep finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

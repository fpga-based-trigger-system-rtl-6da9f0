// Full-size testbench: lux_trigger_top exactly as built for the detector, with
// two digitiser boards, seven builder links and the 10 s rate period, with no
// parameter changed. It runs the same event sequence as tb_lux_trigger_top:
// quiet-time restart, S2Mode trigger and its latency, hold-off, maximum-
// detector rejection, bad-event veto, S1Mode trigger, the S1-not-S2 rule,
// S1&S2Mode drift time-out and trigger, an S1&S2 event with the rule on
// (S1 Found delayed), and a standalone board trigger. Each
// mechanism is counted and a failure is counted if it never happens. The
// rate meter's 10 s period (640 million clocks) is too long to simulate, so
// this run only checks that no report appears early; the shortened-period
// testbench checks the report itself.
module tb_lux_full;
  import lux_trig_pkg::*;
  localparam int NB = 2;
  logic clk = 0, ts_clk = 0, rst_n = 0, ts_clr = 0;
  logic [NB-1:0][7:0][13:0] adc;
  ch_cfg_t [NB-1:0][7:0] ch_cfg;
  fsm_cfg_t fsm_cfg;
  logic [6:0] link_en;
  logic [111:0][4:0] tr_assign;
  logic [15:0][6:0] tr_thr;
  logic [55:0] max_allow;
  dec_cfg_t dec_cfg;
  logic [1:0] tm_sel;
  logic tm_we = 0;
  logic [11:0] tm_waddr;
  logic [15:0] tm_wdata;
  sweep_cfg_t [NB-1:0] sweep_cfg;
  logic [NB-1:0][31:0] sweep_data;
  logic [NB-1:0] sweep_busy, sweep_done;
  logic daq_trigger, rate_strobe, desync;
  logic [47:0] dec_ts;
  logic [3:0] xlm_lanes;
  logic [31:0] rate;
  logic [NB-1:0] ddc_trigger, bad_event, s1_found_line, s2_found_line, drift_timeout, quiet_restart;
  fsm_state_e [NB-1:0] ddc_state;
  logic [15:0] ghv, link_errors;
  logic [15:0][6:0] group_counts;

  int checks = 0, failures = 0;
  int dip[NB][8];

  always #7.8125 clk = ~clk;   // 64 MHz
  always #5 ts_clk = ~ts_clk;  // 100 MHz

  lux_trigger_top dut (.*);

  // XLM record decoder
  logic xv, xerr;
  xlm_rec_t xrec;
  fast_link_rx #(.PW($bits(xlm_rec_t))) u_xrx (.clk, .rst_n, .lanes(xlm_lanes), .valid(xv), .err(xerr), .data(xrec));

  // ADC model
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < 8; c++)
        adc[b][c] <= 14'(8000 + $urandom_range(0, 3) - dip[b][c]);

  // ---- event counters ----
  int n_daq = 0, n_qr = 0, n_drift = 0, n_bad = 0, n_ddc_trig = 0, n_xlm = 0, n_xlm_rej = 0;
  int n_rate = 0, n_desync = 0, rate_seen = 0;
  int daq_in_period = 0;
  logic daq_q = 0;
  xlm_rec_t last_x;
  always @(posedge clk) if (rst_n) begin
    daq_q <= daq_trigger;
    if (daq_trigger && !daq_q) begin n_daq++; daq_in_period++; end
    for (int b = 0; b < NB; b++) begin
      if (quiet_restart[b]) n_qr++;
      if (drift_timeout[b]) n_drift++;
      if (bad_event[b]) n_bad++;
      if (ddc_trigger[b]) n_ddc_trig++;
    end
    if (desync) begin n_desync++; if (n_desync < 4) $display("desync t=%0t states %s %s", $time, ddc_state[0].name(), ddc_state[1].name()); end
    if (xv && !xerr) begin n_xlm++; last_x <= xrec; if (!xrec.trig) n_xlm_rej++; end
    if (rate_strobe) begin
      n_rate++;
      checks++;
      if (rate != 32'(daq_in_period)) begin failures++; $display("rate %0d, counted %0d", rate, daq_in_period); end
      daq_in_period = (daq_trigger && !daq_q) ? 1 : 0;
    end
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s  (t=%0t)", s, $time); end
  endtask

  task automatic s1_pulse(int b, int c, int amp);
    fork begin
      dip[b][c] = amp; repeat (3) @(posedge clk); dip[b][c] = 0;
    end join_none
  endtask
  task automatic s2_pulse(int b, int c, int amp, int w);
    fork begin
      dip[b][c] = amp; repeat (w) @(posedge clk); dip[b][c] = 0;
    end join_none
  endtask

  task automatic wait_state(fsm_state_e s, int limit, string what);
    int n = 0;
    while (ddc_state[0] != s && n < limit) begin @(negedge clk); n++; end
    chk(ddc_state[0] == s, {"reach ", s.name(), " ", what});
  endtask

  task automatic write_maps();
    for (int m = 0; m <= NB; m++)
      for (int w = 0; w < 4096; w++) begin
        @(negedge clk);
        tm_we = 1; tm_sel = 2'(m); tm_waddr = 12'(w);
        for (int k = 0; k < 16; k++) begin
          int a;
          a = w*16 + k;
          tm_wdata[k] = (m < NB) ? ($countones(a) >= 2) : (a[0] || a[1]);
        end
      end
    @(negedge clk);
    tm_we = 0;
  endtask

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, lat, xlm_before, daq_before, n_s1_suppressed, n_s1_late, n_holdoff_ignored, n_max_rej, n_veto;
    n_s1_suppressed = 0; n_s1_late = 0; n_holdoff_ignored = 0; n_max_rej = 0; n_veto = 0;
    for (int b = 0; b < NB; b++) for (int c = 0; c < 8; c++) dip[b][c] = 0;
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < 8; c++) begin
        ch_cfg[b][c] = '0;
        ch_cfg[b][c].s1_n = 4;  ch_cfg[b][c].s1_trunc = 0;
        ch_cfg[b][c].s2_n = 16; ch_cfg[b][c].s2_trunc = 2;
        ch_cfg[b][c].s1_lo = 100; ch_cfg[b][c].s1_hi = 5000;
        ch_cfg[b][c].s2_lo = 500; ch_cfg[b][c].s2_hi = 4000;
      end
    fsm_cfg = '0;
    fsm_cfg.mode = MODE_S2; fsm_cfg.connected_tb = 1; fsm_cfg.quiet_us = 5;
    fsm_cfg.s1_cw = 16; fsm_cfg.s2_cw = 64; fsm_cfg.max_drift = 1000; fsm_cfg.holdoff_us = 20;
    link_en = 7'b0000011;
    for (int i = 0; i < 112; i++) tr_assign[i] = '0;
    for (int i = 0; i < 16; i++) begin
      tr_assign[i]      = {1'b1, 4'd1};   // S1 bits -> counter 1
      tr_assign[56 + i] = {1'b1, 4'd0};   // S2 bits -> counter 0
    end
    tr_thr = '0; tr_thr[0] = 2; tr_thr[1] = 1;
    max_allow = '0; max_allow[7:4] = 4'hF;  // T5..T8
    dec_cfg = '0; dec_cfg.use_max = 1; dec_cfg.veto_bad = 1;
    sweep_cfg = '0;
    tm_sel = 0; tm_waddr = 0; tm_wdata = 0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    @(negedge ts_clk) ts_clr = 1; @(negedge ts_clk) ts_clr = 0;
    write_maps();
    // restart the boards so that they begin in the quiet time again
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (150) @(negedge clk);   // filter delay lines fill

    // ---- S2Mode: quiet-time restart, trigger, latency ----
    wait_state(ST_QUIET, 10, "start");
    s1_pulse(1, 3, 400);          // activity during the quiet time
    repeat (20) @(negedge clk);
    chk(n_qr > 0, "quiet time restarted by an S1 crossing");
    wait_state(ST_ARMED, 5*64 + 100, "after quiet time");
    s2_pulse(0, 5, 100, 64);
    s2_pulse(1, 2, 60, 64);
    wait_state(ST_S2_WIN, 200, "S2 window");
    t0 = $time;
    daq_before = n_daq;
    while (!daq_trigger && ($time - t0) < 400*15.625) @(negedge clk);
    lat = int'(($time - t0) / 15.625);
    $display("S2 window opening to DAQ trigger: %0d clocks (%0d ns)", lat, int'(lat*15.625));
    chk(daq_trigger, "S2Mode trigger");
    chk(lat >= 128 && lat <= 224, "trigger 2..3.5 us after the S2 window opens");
    @(negedge clk);
    repeat (80) @(negedge clk);
    chk(last_x.trig && last_x.max_idx == 6'd5 && last_x.ghv[0] && last_x.s2_hv[5] && last_x.s2_hv[8+2],
        "XLM record of the S2 trigger");
    // ---- hold-off: a new S2 pair is ignored ----
    chk(ddc_state[0] == ST_HOLDOFF, "in hold-off after the trigger");
    daq_before = n_daq;
    xlm_before = n_xlm;
    s2_pulse(0, 6, 100, 64);
    s2_pulse(1, 4, 100, 64);
    repeat (300) @(negedge clk);
    if (n_daq == daq_before && n_xlm == xlm_before && ddc_state[0] == ST_HOLDOFF) n_holdoff_ignored++;
    // ---- maximum detector rejects an event peaking in an outer group ----
    wait_state(ST_ARMED, 20*64 + 5*64 + 400, "after hold-off");
    daq_before = n_daq; xlm_before = n_xlm;
    s2_pulse(0, 0, 150, 64);   // T1, outer, largest
    s2_pulse(0, 6, 60, 64);
    while (n_xlm == xlm_before) @(negedge clk);
    @(negedge clk);
    if (!last_x.trig && last_x.max_idx == 0 && last_x.ghv[0]) n_max_rej++;
    chk(n_daq == daq_before, "no trigger when the maximum lies in an outer group");
    // ---- bad event veto ----
    wait_state(ST_ARMED, 5*64 + 400, "before bad event");
    daq_before = n_daq; xlm_before = n_xlm;
    s2_pulse(0, 5, 600, 64);   // above the S2 upper threshold
    s2_pulse(0, 7, 60, 64);
    while (n_xlm == xlm_before) @(negedge clk);
    @(negedge clk);
    if (!last_x.trig && last_x.bad && n_bad > 0) n_veto++;
    chk(n_daq == daq_before, "bad event vetoed");

    // ---- S1Mode ----
    fsm_cfg.mode = MODE_S1;
    wait_state(ST_ARMED, 5*64 + 400, "S1Mode armed");
    daq_before = n_daq;
    s1_pulse(0, 4, 300);
    s1_pulse(1, 6, 300);
    repeat (250) @(negedge clk);
    chk(n_daq == daq_before + 1, "S1Mode trigger");
    $display("S1Mode: xlm=%0d trig=%b s1hv=%h ghv=%h max=%0d bad=%b", n_xlm, last_x.trig, last_x.s1_hv, last_x.ghv, last_x.max_idx, last_x.bad);
    chk(last_x.s1_hv[4] && last_x.s1_hv[8+6] && last_x.ghv[1], "S1 hit vectors in the record");
    // ---- S1-not-S2 rule: an S2 pulse's edge must not start an S1 cycle ----
    fsm_cfg.s1_not_s2 = 1;
    wait_state(ST_ARMED, 20*64 + 5*64 + 400, "S1Mode armed, rule on");
    repeat (400) @(negedge clk);
    xlm_before = n_xlm;
    s2_pulse(1, 1, 120, 64);
    begin
      bit opened = 0;
      repeat (400) begin
        @(negedge clk);
        if (ddc_state[0] != ST_ARMED) opened = 1;
      end
      if (!opened && n_xlm == xlm_before) n_s1_suppressed++;
    end
    // the same pulse without the rule opens an S1 window
    fsm_cfg.s1_not_s2 = 0;
    wait_state(ST_ARMED, 20*64 + 5*64 + 400, "S1Mode armed, rule off");
    s2_pulse(1, 1, 120, 64);
    begin
      bit opened = 0;
      repeat (100) begin
        @(negedge clk);
        if (ddc_state[0] == ST_S1_WIN) opened = 1;
      end
      chk(opened, "without the rule an S2 edge starts an S1 cycle");
    end

    // ---- S1&S2Mode: drift time-out, then a full S1+S2 event ----
    fsm_cfg.mode = MODE_S1S2;
    wait_state(ST_QUIET, 30*64, "S1&S2Mode start");
    wait_state(ST_ARMED, 5*64 + 400, "S1&S2Mode armed");
    s1_pulse(0, 5, 300);
    repeat (32 + 1000 + 40) @(negedge clk);
    chk(n_drift > 0, "drift time-out in S1&S2Mode");
    wait_state(ST_ARMED, 5*64 + 400, "S1&S2Mode armed again");
    daq_before = n_daq;
    s1_pulse(0, 5, 300);
    s1_pulse(0, 6, 300);
    repeat (300) @(negedge clk);
    chk(ddc_state[0] == ST_DRIFT, "drifting after the S1 window");
    s2_pulse(0, 5, 100, 64);
    s2_pulse(1, 3, 80, 64);
    repeat (350) @(negedge clk);
    chk(n_daq == daq_before + 1, "S1&S2Mode trigger");
    chk(last_x.s1_hv[5] && last_x.s1_hv[6] && last_x.s2_hv[5] && last_x.s2_hv[8+3], "S1&S2 record");

    // ---- S1&S2 event with the S1-not-S2 rule: S1 Found comes late ----
    fsm_cfg.s1_not_s2 = 1;
    wait_state(ST_ARMED, 30*64 + 5*64 + 400, "S1&S2Mode armed, rule on");
    begin
      int ts1, n;
      daq_before = n_daq;
      s1_pulse(0, 2, 300);
      s1_pulse(1, 7, 300);
      n = 0;
      while (!s1_found_line[0] && n < 300) begin @(negedge clk); n++; end
      ts1 = n;
      $display("S1 pulse to S1 Found with the rule on: %0d clocks", ts1);
      chk(ts1 >= 76 && ts1 <= 90, "S1 Found delayed by about 5*n2 - n1 clocks");
      if (ts1 >= 76 && ts1 <= 90) n_s1_late++;
      repeat (200) @(negedge clk);
      s2_pulse(0, 5, 100, 64);
      s2_pulse(1, 5, 100, 64);
      repeat (350) @(negedge clk);
      chk(n_daq == daq_before + 1, "S1&S2Mode trigger with the rule on");
      chk(last_x.s1_hv[2] && last_x.s1_hv[8+7], "S1 hits of the delayed S1");
    end
    fsm_cfg.s1_not_s2 = 0;

    // ---- standalone board ----
    fsm_cfg.mode = MODE_S2; fsm_cfg.connected_tb = 0;
    wait_state(ST_ARMED, 30*64 + 5*64 + 400, "standalone armed");
    daq_before = n_daq;
    s2_pulse(0, 4, 100, 64);
    s2_pulse(0, 7, 100, 64);
    repeat (300) @(negedge clk);
    chk(n_ddc_trig >= 1, "standalone board trigger");
    chk(n_daq == daq_before, "builder silent when boards are standalone");


    // ---- mechanism coverage ----
    chk(n_qr > 0,              "covered: quiet-time restart");
    chk(n_holdoff_ignored > 0, "covered: pulse ignored during hold-off");
    chk(n_max_rej > 0,         "covered: maximum-detector rejection");
    chk(n_veto > 0,            "covered: bad-event veto");
    chk(n_s1_suppressed > 0,   "covered: S1-not-S2 suppression");
    chk(n_s1_late > 0,         "covered: S1 Found delayed by the S1-not-S2 rule");
    chk(n_drift > 0,           "covered: drift time-out");
    chk(n_ddc_trig > 0,        "covered: standalone trigger");
    chk(n_rate == 0,           "no rate report before the first 10 s period ends");
    chk(n_desync == 0,         "boards stayed in step");
    chk(link_errors == 0,      "no fast-link errors");
    $display("DAQ triggers %0d, XLM records %0d (%0d rejected), drift time-outs %0d, bad events %0d",
             n_daq, n_xlm, n_xlm_rej, n_drift, n_bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

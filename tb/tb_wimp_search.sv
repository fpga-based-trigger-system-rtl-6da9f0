// Workload testbench: the WIMP-search trigger setting, run on lux_trigger_top
// at its default size (two boards, seven builder links, 10 s rate period).
//
// Setting: S2Mode; S2 filter n = 16 (m = 64, about 2 us long); S2 lower
// threshold on every group; coincidence of >= 2 groups within a 2 us window
// (S2 hit bits of all 16 groups go to hit counter 0 with threshold 2, and the
// builder map accepts global bit 0); hold-off 1 ms; no quiet time; maximum
// check off; bad veto on.
//
// Stimulus: S2-like pulses (64-sample dips) on 1 to 4 randomly chosen groups
// at once. Expected: a trigger exactly when 2 or more groups fire and the
// system is not in hold-off, 2.3..3.5 us after the S2 window opens. Events
// sent during the 1 ms hold-off must not trigger. Counts of each case are
// required to be non-zero.
module tb_wimp_search;
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
  logic [1:0] tm_sel = 2'd2;
  logic tm_we = 0;
  logic [11:0] tm_waddr = 0;
  logic [15:0] tm_wdata = 0;
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
  int n_daq = 0;
  logic daq_q = 0;

  always #7.8125 clk = ~clk;
  always #5 ts_clk = ~ts_clk;

  lux_trigger_top dut (.*);

  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < 8; c++)
        adc[b][c] <= 14'(8000 + $urandom_range(0, 3) - dip[b][c]);

  always @(posedge clk) if (rst_n) begin
    daq_q <= daq_trigger;
    if (daq_trigger && !daq_q) n_daq++;
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (t=%0t)", s, $time); end
  endtask

  // S2 pulses on k distinct random groups
  task automatic fire(int k);
    bit used[16];
    int placed = 0;
    while (placed < k) begin
      int g;
      g = $urandom_range(0, 15);
      if (!used[g]) begin
        used[g] = 1;
        placed++;
        fork
          automatic int gg = g;
          begin dip[gg/8][gg%8] = 100; repeat (64) @(posedge clk); dip[gg/8][gg%8] = 0; end
        join_none
      end
    end
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_acc = 0, n_rej = 0, n_blocked = 0, d0, k, t;
    for (int b = 0; b < NB; b++) for (int c = 0; c < 8; c++) begin
      dip[b][c] = 0;
      ch_cfg[b][c] = '0;
      ch_cfg[b][c].s1_n = 4; ch_cfg[b][c].s1_lo = 100; ch_cfg[b][c].s1_hi = 65535;
      ch_cfg[b][c].s2_n = 16; ch_cfg[b][c].s2_trunc = 2;
      ch_cfg[b][c].s2_lo = 500; ch_cfg[b][c].s2_hi = 65535;
    end
    fsm_cfg = '0;
    fsm_cfg.mode = MODE_S2; fsm_cfg.connected_tb = 1; fsm_cfg.bypass_quiet = 1;
    fsm_cfg.s1_cw = 16; fsm_cfg.s2_cw = 64; fsm_cfg.holdoff_us = 1000;
    link_en = 7'b0000011;
    for (int i = 0; i < 112; i++) tr_assign[i] = '0;
    for (int i = 0; i < 16; i++) tr_assign[56 + i] = {1'b1, 4'd0};
    tr_thr = '0; tr_thr[0] = 2;
    max_allow = '1;
    dec_cfg = '0; dec_cfg.veto_bad = 1;
    sweep_cfg = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge ts_clk) ts_clr = 1; @(negedge ts_clk) ts_clr = 0;
    // builder map: accept when global bit 0 is set
    for (int w = 0; w < 4096; w++) begin
      @(negedge clk);
      tm_we = 1; tm_sel = 2'd2; tm_waddr = 12'(w);
      for (int j = 0; j < 16; j++) tm_wdata[j] = j[0];
    end
    @(negedge clk) tm_we = 0;
    repeat (500) @(negedge clk);

    for (int e = 0; e < 10; e++) begin
      k = (e < 2) ? e + 1 : $urandom_range(1, 4);
      d0 = n_daq;
      fire(k);
      t = 0;
      // time from the S2 window opening (the S2 being detected) to the trigger
      while (ddc_state[0] == ST_ARMED && t < 200) begin @(negedge clk); t++; end
      t = 0;
      while (n_daq == d0 && t < 400) begin @(negedge clk); t++; end
      if (k >= 2) begin
        chk(n_daq == d0 + 1, $sformatf("event %0d with %0d groups triggers", e, k));
        chk(t >= 128 + 20 && t <= 224, $sformatf("event %0d trigger %0d clocks after S2 detection", e, t));
        if (e == 1) $display("S2 detection to trigger: %0d clocks = %0d ns", t, int'(t * 15.625));
        n_acc++;
        // a second event 200 us later falls in the 1 ms hold-off
        repeat (200 * 64) @(negedge clk);
        d0 = n_daq;
        fire(3);
        repeat (400) @(negedge clk);
        chk(n_daq == d0 && ddc_state[0] == ST_HOLDOFF, "event inside the hold-off ignored");
        n_blocked++;
        // wait out the hold-off
        repeat (1000 * 64) @(negedge clk);
        chk(ddc_state[0] == ST_ARMED, "armed again after 1 ms hold-off");
      end else begin
        chk(n_daq == d0, $sformatf("event %0d with one group does not trigger", e));
        n_rej++;
        repeat (300) @(negedge clk);
        chk(ddc_state[0] == ST_ARMED, "armed again after a rejected event");
      end
    end
    chk(n_acc > 0, "covered: accepted coincidences");
    chk(n_rej > 0, "covered: single-group events rejected");
    chk(n_blocked > 0, "covered: events blocked by the hold-off");
    chk(desync == 0 && link_errors == 0, "boards in step, links clean");
    $display("accepted %0d, rejected %0d, blocked by hold-off %0d", n_acc, n_rej, n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

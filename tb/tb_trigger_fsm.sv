// Testbench of trigger_fsm, with 4 clocks per "microsecond" to keep it short.
// The board-wide flags and channel hits are driven directly. A model of the
// trigger map accepts an address when at least two of its bits are set.
// Scenarios and what they check:
//   1 S2Mode, standalone: activity during the quiet time restarts it; the
//     quiet time then lasts quiet_us; the S2 window lasts 2*s2_cw clocks and
//     keeps hits inside it but not after it; maximum channel and value; the
//     map result gives a trigger; the hold-off lasts holdoff_us.
//   2 S1Mode, standalone, with an upper-threshold crossing: no trigger, back
//     to QUIET without hold-off; hold-off of 0 reads as 4 us (scenario 5).
//   3 S1&S2Mode, no S2 within the drift time: the cycle is dropped after
//     max_drift+1 clocks.
//   4 S1&S2Mode, connected: S2 during the drift opens the S2 window; the
//     record carries both hit vectors; the builder's reply ends the cycle.
module tb_trigger_fsm;
  import lux_trig_pkg::*;
  localparam int US = 4;
  logic clk = 0, rst_n = 0;
  fsm_cfg_t cfg;
  logic g_s1_raw = 0, g_s1 = 0, g_s2 = 0;
  logic [7:0] s1_found = 0, s1_big = 0, s2_found = 0, s2_big = 0;
  logic [7:0][15:0] s2_y = '0;
  logic [15:0] map_addr;
  logic map_bit;
  logic tb_done = 0, tb_trig = 0;
  logic rec_valid, bad, map_ok, trigger, drift_timeout, quiet_restart;
  logic [7:0] s1_hv, s2_hv;
  logic [2:0] max_ch;
  logic [15:0] max_val;
  fsm_state_e state;
  int checks = 0, failures = 0;
  int n_trig = 0, n_rec = 0, n_drift = 0, n_qr = 0;

  always #5 clk = ~clk;

  trigger_fsm #(.NCH(8), .US(US)) dut (.*);

  always_ff @(posedge clk) map_bit <= ($countones(map_addr) >= 2);
  always @(posedge clk) begin
    if (trigger) n_trig++;
    if (rec_valid) n_rec++;
    if (drift_timeout) n_drift++;
    if (quiet_restart) n_qr++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (state %s)", what, state.name()); end
  endtask

  // clocks spent in state st, counted from now until it is left
  task automatic time_in(fsm_state_e st, output int n);
    n = 0;
    while (state != st) @(negedge clk);
    while (state == st) begin n++; @(negedge clk); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    cfg = '0;
    cfg.mode = MODE_S2; cfg.quiet_us = 5; cfg.s1_cw = 4; cfg.s2_cw = 8;
    cfg.max_drift = 30; cfg.holdoff_us = 6;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- 1: S2Mode ----
    repeat (7) @(negedge clk);
    g_s1_raw = 1; @(negedge clk); g_s1_raw = 0;   // restarts the quiet time
    check(state == ST_QUIET, "still quiet after activity");
    time_in(ST_QUIET, n);
    check(n == 5*US, $sformatf("quiet time %0d clocks, expected %0d", n, 5*US));
    check(state == ST_ARMED, "armed after quiet");
    repeat (3) @(negedge clk);
    check(state == ST_ARMED, "waits for a pulse");
    // window starts with S2 on channel 0
    g_s2 = 1; s2_found = 8'b0000_0001; s2_y[0] = 300;
    @(negedge clk);
    g_s2 = 0; s2_found = 0; s2_y = '0;
    check(state == ST_S2_WIN, "S2 window open");
    n = 1;
    repeat (4) begin @(negedge clk); n++; end
    s2_found = 8'b0000_1000; s2_y[3] = 900; s2_y[6] = 500;
    @(negedge clk); n++;
    s2_found = 0; s2_y = '0;
    while (state == ST_S2_WIN) begin
      if (n == 2*8 - 1) s2_found = 8'b0010_0000;   // last clock of the window
      @(negedge clk); n++;
    end
    s2_found = 8'b0100_0000;   // after the window: not counted
    @(negedge clk);
    s2_found = 0;
    check(n - 1 == 2*8, $sformatf("S2 window %0d clocks, expected 16", n - 1));
    check(s2_hv == 8'b0010_1001, $sformatf("S2 hit vector %b", s2_hv));
    check(max_ch == 3 && max_val == 900, "maximum channel and value");
    check(s1_hv == 0 && !bad, "no S1 hits, not bad");
    time_in(ST_HOLDOFF, n);
    check(n_trig == 1, "trigger issued");
    check(n == 6*US, $sformatf("hold-off %0d clocks, expected %0d", n, 6*US));

    // ---- 2: S1Mode with a big pulse ----
    cfg.mode = MODE_S1; cfg.bypass_quiet = 1; cfg.holdoff_us = 0;
    while (state != ST_ARMED) @(negedge clk);
    g_s1 = 1; s1_found = 8'b1100_0000; s1_big = 8'b0100_0000;
    @(negedge clk);
    g_s1 = 0; s1_found = 0; s1_big = 0;
    time_in(ST_S1_WIN, n);
    check(n == 2*4, $sformatf("S1 window %0d clocks, expected 8", n));
    check(s1_hv == 8'b1100_0000 && bad, "S1 hits and bad flag");
    @(negedge clk);
    check(n_trig == 1 && (state == ST_QUIET || state == ST_ARMED), "bad cycle rejected without hold-off");

    // ---- 5: hold-off of 0 reads as the 4 us minimum ----
    while (state != ST_ARMED) @(negedge clk);
    g_s1 = 1; s1_found = 8'b0000_0011;
    @(negedge clk);
    g_s1 = 0; s1_found = 0;
    time_in(ST_HOLDOFF, n);
    check(n_trig == 2, "S1 trigger");
    check(n == 4*US, $sformatf("minimum hold-off %0d clocks", n));

    // ---- 3: S1&S2Mode, drift time runs out ----
    cfg.mode = MODE_S1S2;
    while (state != ST_ARMED) @(negedge clk);
    g_s1 = 1; s1_found = 8'b0000_0100;
    @(negedge clk);
    g_s1 = 0; s1_found = 0;
    time_in(ST_DRIFT, n);
    check(n == 30 + 1, $sformatf("drift limit %0d clocks, expected 31", n));
    @(negedge clk);
    check(n_drift == 1, "drift time-out reported");

    // ---- 4: S1&S2Mode, connected to the builder ----
    cfg.connected_tb = 1;
    while (state != ST_ARMED) @(negedge clk);
    g_s1 = 1; s1_found = 8'b0001_0000;
    @(negedge clk);
    g_s1 = 0; s1_found = 0;
    while (state != ST_DRIFT) @(negedge clk);
    repeat (10) @(negedge clk);
    g_s2 = 1; s2_found = 8'b1000_0000; s2_y[7] = 1234;
    @(negedge clk);
    g_s2 = 0; s2_found = 0; s2_y = '0;
    check(state == ST_S2_WIN, "S2 found during the drift");
    while (!rec_valid) @(negedge clk);
    check(s1_hv == 8'b0001_0000 && s2_hv == 8'b1000_0000 && map_ok, "record contents");
    check(max_ch == 7 && max_val == 1234, "record maximum");
    @(negedge clk);
    check(state == ST_WAIT_TB, "waits for builder");
    repeat (20) @(negedge clk);
    check(state == ST_WAIT_TB && n_trig == 2, "no own trigger when connected");
    tb_done = 1; tb_trig = 1; @(negedge clk); tb_done = 0; tb_trig = 0;
    check(state == ST_HOLDOFF, "builder trigger starts the hold-off");
    check(n_rec == 1 && n_qr >= 1, "record count and quiet restart seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

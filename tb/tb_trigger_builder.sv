// Testbench of the Trigger Builder (trigger_builder) with seven links, of
// which links 0 and 1 are enabled. The testbench plays two boards: it sends
// board records on fast links and watches the replies, the DAQ trigger and
// the record sent to the DAQ logic module.
//
// Set-up: S2 hit bits count in group 0 (threshold 2), S1 hit bits in group 1
// (threshold 1); the map accepts global bit 0 or 1; the maximum may lie only
// in board 0 channels 4..7; bad events are vetoed.
// Checks: accepted event (reply, DAQ pulse, timestamp, record fields);
// collection time-out when one board stays silent; maximum-detector
// rejection; bad veto; S1-only event; slow-link OR and desync; rate report.
module tb_trigger_builder;
  import lux_trig_pkg::*;
  localparam int NL = 7;
  logic clk = 0, ts_clk = 0, rst_n = 0, ts_clr = 0;
  logic [NL-1:0] link_en;
  logic [NL-1:0][3:0] fast_lanes;
  logic [NL-1:0] b_s1_raw, b_s1, b_s2;
  fsm_state_e [NL-1:0] b_state;
  logic g_s1_raw, g_s1, g_s2, tb_done, tb_trig, desync;
  logic [2*NL*8-1:0][4:0] tr_assign;
  logic [NGROUP-1:0][GCNT_W-1:0] tr_thr;
  logic [NL*8-1:0] max_allow;
  dec_cfg_t dec_cfg;
  logic tm_we = 0;
  logic [11:0] tm_waddr = 0;
  logic [15:0] tm_wdata = 0;
  logic daq_trigger, rate_strobe;
  logic [3:0] xlm_lanes;
  logic [31:0] rate;
  logic [15:0] link_errors;
  logic [NGROUP-1:0] ghv_out;
  logic [TS_W-1:0] dec_ts;
  logic [NGROUP-1:0][GCNT_W-1:0] group_counts;
  int checks = 0, failures = 0;

  always #7.8125 clk = ~clk;
  always #5 ts_clk = ~ts_clk;

  trigger_builder #(.RATE_PERIOD(20000)) dut (.*);

  // two board transmitters
  logic [1:0] tx_valid = 0, tx_ready;
  ddc_rec_t [1:0] tx_data;
  for (genvar b = 0; b < 2; b++) begin : g_tx
    fast_link_tx #(.PW(REC_W)) u_tx (.clk, .rst_n, .valid(tx_valid[b]), .ready(tx_ready[b]),
                                     .data(tx_data[b]), .lanes(fast_lanes[b]));
  end
  assign fast_lanes[NL-1:2] = '0;

  logic xv, xerr;
  xlm_rec_t xrec, last;
  fast_link_rx #(.PW($bits(xlm_rec_t))) u_xrx (.clk, .rst_n, .lanes(xlm_lanes), .valid(xv), .err(xerr), .data(xrec));

  int n_daq = 0, n_done = 0, n_trig = 0, n_x = 0, daq_period = 0, n_rate = 0;
  logic daq_q = 0;
  always @(posedge clk) if (rst_n) begin
    daq_q <= daq_trigger;
    if (daq_trigger && !daq_q) begin n_daq++; daq_period++; end
    if (tb_done) begin n_done++; if (tb_trig) n_trig++; end
    if (xv) begin n_x++; last <= xrec; end
    if (rate_strobe) begin
      n_rate++; checks++;
      if (rate != 32'(daq_period)) begin failures++; $display("FAIL: rate %0d expected %0d", rate, daq_period); end
      daq_period = 0;
    end
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (t=%0t)", s, $time); end
  endtask

  function automatic ddc_rec_t mk(logic [7:0] s1, logic [7:0] s2, int mch, int mval, bit bad);
    ddc_rec_t r;
    r = '0;
    r.s1_hv = s1; r.s2_hv = s2; r.max_ch = 3'(mch); r.max_val = 16'(mval); r.bad = bad; r.map_ok = 1;
    return r;
  endfunction

  // send records on the selected boards, then wait for the reply
  task automatic event_cycle(bit send0, bit send1, ddc_rec_t r0, ddc_rec_t r1, output bit trig, output int wait_clk);
    int d0, x0;
    d0 = n_done; x0 = n_x;
    @(negedge clk);
    tx_data[0] = r0; tx_data[1] = r1;
    tx_valid = {send1, send0};
    @(negedge clk);
    tx_valid = 0;
    wait_clk = 0;
    while (n_done == d0 && wait_clk < 500) begin @(negedge clk); wait_clk++; end
    trig = (n_trig > 0) && tb_trig_seen(d0);
    for (int k = 0; n_x == x0 && k < 500; k++) @(negedge clk);
    @(negedge clk);
  endtask
  int trig_at_done[$];
  always @(posedge clk) if (rst_n && tb_done) trig_at_done.push_back(tb_trig);
  function automatic bit tb_trig_seen(int idx);
    return (trig_at_done.size() > idx) ? trig_at_done[idx] : 1'b0;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit tr;
    int w, dq;
    link_en = 7'b0000011;
    b_s1_raw = '0; b_s1 = '0; b_s2 = '0;
    for (int i = 0; i < NL; i++) b_state[i] = ST_ARMED;
    for (int i = 0; i < 2*NL*8; i++) tr_assign[i] = '0;
    for (int i = 0; i < 16; i++) begin
      tr_assign[i] = {1'b1, 4'd1};
      tr_assign[NL*8 + i] = {1'b1, 4'd0};
    end
    tr_thr = '0; tr_thr[0] = 2; tr_thr[1] = 1;
    max_allow = '0; max_allow[7:4] = 4'hF;
    dec_cfg = '0; dec_cfg.use_max = 1; dec_cfg.veto_bad = 1;
    tx_data = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge ts_clk) ts_clr = 1; @(negedge ts_clk) ts_clr = 0;
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk);
      tm_we = 1; tm_waddr = 12'(a);
      for (int k = 0; k < 16; k++) tm_wdata[k] = (k[0] || k[1]);
    end
    @(negedge clk) tm_we = 0;
    repeat (50) @(negedge clk);

    // slow link: OR of enabled boards, desync
    b_s2[1] = 1; #1;
    chk(g_s2 && !g_s1, "S2 flag of board 1 reaches all boards");
    b_s1[5] = 1; b_s2[1] = 0; #1;
    chk(!g_s1, "flag of a disabled link ignored");
    b_s1[5] = 0;
    chk(!desync, "no desync when states agree");
    b_state[1] = ST_S2_WIN; #1;
    chk(desync, "desync when states differ");
    b_state[1] = ST_ARMED;

    // accepted S2 event, maximum in T6
    dq = n_daq;
    event_cycle(1, 1, mk(0, 8'h60, 5, 900, 0), mk(0, 8'h01, 0, 400, 0), tr, w);
    chk(tr && n_daq == dq + 1, "two-board S2 event triggers");
    $display("records sent to reply: %0d clocks", w);
    chk(w < 50, "decision within 50 clocks of the records");
    chk(last.trig && last.ghv[0] && last.max_idx == 6'd5 && last.max_val == 16'd900 &&
        last.s2_hv[6:5] == 2'b11 && last.s2_hv[8] && !last.bad, "XLM record of the accepted event");
    chk(dec_ts != 0 && last.ts >= dec_ts && last.ts - dec_ts <= 3, "decision timestamp");
    chk(group_counts[0] == 3, "hit counter 0 counted 3 S2 bits");
    // maximum in board 1 -> rejected
    dq = n_daq;
    event_cycle(1, 1, mk(0, 8'h60, 5, 300, 0), mk(0, 8'h01, 0, 800, 0), tr, w);
    chk(!tr && n_daq == dq && last.max_idx == 6'd8 && !last.trig, "maximum outside the allowed groups rejected");
    // bad veto
    event_cycle(1, 1, mk(0, 8'h60, 5, 900, 1), mk(0, 8'h01, 0, 400, 0), tr, w);
    chk(!tr && last.bad, "bad event vetoed");
    // only one S2 bit -> map rejects
    event_cycle(1, 1, mk(0, 8'h20, 5, 900, 0), mk(0, 8'h00, 0, 0, 0), tr, w);
    chk(!tr, "single S2 bit rejected by the map");
    // board 1 silent -> time-out, still decided
    event_cycle(1, 0, mk(0, 8'h30, 4, 900, 0), '0, tr, w);
    chk(tr && w >= 64, "collection time-out with a silent board");
    // S1-only event (maximum check not applied)
    event_cycle(1, 1, mk(8'h01, 0, 0, 0, 0), mk(0, 0, 0, 0, 0), tr, w);
    chk(tr && last.ghv[1] && !last.ghv[0], "S1-only event triggers");
    chk(link_errors == 0, "no link errors");
    while (n_rate < 1) @(negedge clk);
    chk(n_rate >= 1, "rate reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Trigger Builder: the second-level board that combines the records of up to
// seven digitiser boards into the final trigger.
//
// Flow for one trigger cycle (all boards finish their cycle on the same clock,
// since the slow link keeps their FSMs in step):
//   1. Each enabled link's fast_link_rx delivers a ddc_rec_t. Once all enabled
//      links have delivered, or COLLECT_TO clocks after the first one did, the
//      records are complete. Missing boards count as no hits.
//   2. The S1 and S2 hit vectors of all boards (board b in bits 8b..8b+7) go
//      to the hit translator. At the same time the maximum detector looks for
//      the largest S2 response.
//   3. The translator's 16-bit global hit vector reads the builder's trigger
//      map (one clock).
//   4. trigger_decision combines the map bit, the maximum check (applied
//      only when some S2 hit bit is set, since an S1-only record carries no
//      S2 maximum), the boards'
//      bad flags and map bits. It pulses `daq_trigger` and returns done/trigger
//      to the boards over the slow link hub.
//   5. A xlm_rec_t record of the decision (timestamp, hit vectors, maximum,
//      decision) goes out on a fast link to the DAQ's logic module, which
//      merges it into the data stream.
// The rate meter counts DAQ triggers over ten-second periods.
//
// Latency from the last record nibble to `daq_trigger` with two boards is
// about 25 clocks (0.4 us). Together with the board's fast link (24 clocks) and
// a 2 us coincidence window, an S2 is followed by a trigger about 3 us later.
//
// From the paper: the builder's blocks (translator, trigger map, maximum
// detector, decision), up to seven boards, the link to the logic module and
// the rate average. Own choices: the collection rule and time-out, the record
// formats, the error counter for failed link checks.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// `disable iff` condition of the assertions, which lint reports as a signal
// used both ways. That is intended: the checks are off while in reset.
module trigger_builder
  import lux_trig_pkg::*;
#(
  parameter int unsigned NL         = TB_LINKS,
  parameter int unsigned COLLECT_TO = 64,
  parameter int unsigned RATE_PERIOD = 640_000_000
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       ts_clk,
  input  logic                       ts_clr,
  input  logic [NL-1:0]              link_en,
  // fast links from the boards
  input  logic [NL-1:0][3:0]         fast_lanes,
  // slow links
  input  logic [NL-1:0]              b_s1_raw,
  input  logic [NL-1:0]              b_s1,
  input  logic [NL-1:0]              b_s2,
  input  fsm_state_e [NL-1:0]        b_state,
  output logic                       g_s1_raw,
  output logic                       g_s1,
  output logic                       g_s2,
  output logic                       tb_done,
  output logic                       tb_trig,
  output logic                       desync,
  // configuration
  input  logic [2*NL*8-1:0][4:0]     tr_assign,
  input  logic [NGROUP-1:0][GCNT_W-1:0] tr_thr,
  input  logic [NL*8-1:0]            max_allow,
  input  dec_cfg_t                   dec_cfg,
  input  logic                       tm_we,
  input  logic [11:0]                tm_waddr,
  input  logic [15:0]                tm_wdata,
  // outputs
  output logic                       daq_trigger,
  output logic [3:0]                 xlm_lanes,
  output logic [31:0]                rate,
  output logic                       rate_strobe,
  output logic [15:0]                link_errors,
  output logic [NGROUP-1:0]          ghv_out,
  output logic [TS_W-1:0]            dec_ts,
  output logic [NGROUP-1:0][GCNT_W-1:0] group_counts
);
  localparam int unsigned NB = NL*8;

  // ---- link receivers ----
  logic [NL-1:0]  rx_valid, rx_err;
  ddc_rec_t [NL-1:0] rx_data, recs;
  logic [NL-1:0]  got;

  for (genvar l = 0; l < NL; l++) begin : g_rx
    fast_link_rx #(.PW(REC_W)) u_rx (
      .clk, .rst_n, .lanes(fast_lanes[l]), .valid(rx_valid[l]), .err(rx_err[l]), .data(rx_data[l]));
  end

  // ---- collection ----
  typedef enum logic [1:0] {C_IDLE, C_COLLECT, C_PROCESS} col_e;
  col_e                        cst;
  logic [$clog2(COLLECT_TO+1)-1:0] ctmr;
  logic                        complete, tr_start, tr_done, md_done;
  logic [NB-1:0]               all_s1, all_s2;
  logic [NL-1:0][2:0]          b_max_ch;
  logic [NL-1:0][FOUT_W-1:0]   b_max_val;
  logic [$clog2(NB+1)-1:0]     scan_len;
  logic                        any_bad, all_map;
  logic [NL-1:0]               got_n;

  always_comb begin
    got_n = got | (rx_valid & ~rx_err & link_en);
    complete = ((got_n & link_en) == link_en) && (|got_n);
    scan_len = '0;
    for (int l = 0; l < NL; l++) begin
      all_s1[l*8 +: 8] = got[l] ? recs[l].s1_hv : 8'h00;
      all_s2[l*8 +: 8] = got[l] ? recs[l].s2_hv : 8'h00;
      b_max_ch[l]      = recs[l].max_ch;
      b_max_val[l]     = recs[l].max_val;
      if (link_en[l]) scan_len = ($clog2(NB+1))'((l+1)*8);
    end
    any_bad = 1'b0;
    all_map = 1'b1;
    for (int l = 0; l < NL; l++)
      if (got[l]) begin
        any_bad = any_bad | recs[l].bad;
        all_map = all_map & recs[l].map_ok;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst <= C_IDLE; got <= '0; ctmr <= '0; tr_start <= 1'b0; recs <= '0; link_errors <= '0;
    end else begin
      tr_start <= 1'b0;
      for (int l = 0; l < NL; l++)
        if (rx_valid[l] && link_en[l]) begin
          if (rx_err[l]) link_errors <= link_errors + 1'b1;
          else if (cst != C_PROCESS) recs[l] <= rx_data[l];
        end
      unique case (cst)
        C_IDLE: if (|(rx_valid & ~rx_err & link_en)) begin
                  got  <= rx_valid & ~rx_err & link_en;
                  ctmr <= '0;
                  if (complete) begin cst <= C_PROCESS; tr_start <= 1'b1; end
                  else          cst <= C_COLLECT;
                end
        C_COLLECT: begin
                  got  <= got_n;
                  ctmr <= ctmr + 1'b1;
                  if (complete || ctmr == ($clog2(COLLECT_TO+1))'(COLLECT_TO)) begin
                    cst <= C_PROCESS; tr_start <= 1'b1;
                  end
                end
        C_PROCESS: if (tb_done) begin cst <= C_IDLE; got <= '0; end
        default: cst <= C_IDLE;
      endcase
    end
  end

  // ---- translator, map, maximum, decision ----
  logic [NGROUP-1:0]             ghv;
  logic [NGROUP-1:0][GCNT_W-1:0] counts;
  logic                          tm_bit, tm_go;
  logic [5:0]                    max_idx;
  logic [FOUT_W-1:0]             max_val;
  logic                          max_ok;
  logic [TS_W-1:0]               ts;

  hit_translator #(.NBITS(NB), .NG(NGROUP), .CW(GCNT_W)) u_tr (
    .clk, .rst_n, .start(tr_start), .scan_len, .s1_hv(all_s1), .s2_hv(all_s2),
    .assign_cfg(tr_assign), .thr(tr_thr), .done(tr_done), .ghv, .counts);

  max_detector #(.NB(NL)) u_max (
    .clk, .rst_n, .start(tr_start), .present(got), .b_max_ch, .b_max_val, .allow(max_allow),
    .done(md_done), .max_idx, .max_val, .max_ok);

  trigger_map #(.AW(16)) u_map (
    .clk, .we(tm_we), .waddr(tm_waddr), .wdata(tm_wdata), .raddr(ghv), .rbit(tm_bit));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) tm_go <= 1'b0;
    else        tm_go <= tr_done;

  ts_counter #(.TS_W(TS_W)) u_ts (.ts_clk, .ts_clr, .clk, .rst_n, .ts);

  logic dec_done, dec_trig;
  trigger_decision #(.TRIG_LEN(8)) u_dec (
    .clk, .rst_n, .cfg(dec_cfg), .go(tm_go), .tm_bit, .max_ok(max_ok || !(|all_s2)), .any_bad, .all_ddc_map(all_map),
    .ts, .done(dec_done), .trig(dec_trig), .daq_trigger, .dec_ts);

  slow_link_hub #(.NB(NL)) u_hub (
    .en(link_en), .b_s1_raw, .b_s1, .b_s2, .b_state, .dec_done, .dec_trig,
    .g_s1_raw, .g_s1, .g_s2, .tb_done, .tb_trig, .desync);

  assign ghv_out = ghv;
  assign group_counts = counts;

  // ---- record to the DAQ logic module ----
  xlm_rec_t xrec;
  logic     xready;
  logic     xlm_send;
  always_comb begin
    xrec.ts      = ts;
    xrec.ghv     = ghv;
    xrec.s1_hv   = TB_BITS'(all_s1);
    xrec.s2_hv   = TB_BITS'(all_s2);
    xrec.max_idx = max_idx;
    xrec.max_val = max_val;
    xrec.bad     = any_bad;
    xrec.trig    = dec_trig;
    xlm_send     = dec_done;
  end

  fast_link_tx #(.PW($bits(xlm_rec_t))) u_xlm (
    .clk, .rst_n, .valid(xlm_send), .ready(xready), .data(xrec), .lanes(xlm_lanes));

  rate_meter #(.PERIOD(RATE_PERIOD), .CNT_W(32)) u_rate (
    .clk, .rst_n, .trig_in(daq_trigger), .rate, .strobe(rate_strobe));

  // Decisions are far enough apart for each record to leave before the next.
  a_xlm_free: assert property (@(posedge clk) disable iff (!rst_n) xlm_send |-> xready);

  // The decision and the maximum search start together and must finish in order.
  a_max_first: assert property (@(posedge clk) disable iff (!rst_n) tr_done |-> !md_done);
endmodule

// Logic of one digitiser board (DDC-8DSP): eight trigger channels, the board
// trigger FSM, the board trigger map, the timestamp and the fast-link
// transmitter.
//
// Data flow: each 14-bit, 64 MHz ADC sample goes into its ddc_channel (S1 and
// S2 filters and discriminators). The channel outputs are registered once.
// From them the board forms its any-channel flags (S1 raw crossing, S1 Found,
// S2 Found). These go out on the slow link and to the S1/S2 Found lines. The
// trigger FSM moves on the board-wide flags that come back over the slow link.
// In a standalone board these are simply its own flags, looped back outside.
// The FSM builds the hit vectors from this board's channels. At the end of a
// cycle it looks up the board trigger map. A board connected to the Trigger
// Builder then sends a ddc_rec_t record (timestamp, hit vectors, maximum S2
// channel and value, bad flag, map bit) over the fast link and waits for the
// builder's reply. A standalone board raises `trigger` itself.
// A trigger sweep runs beside all this on the same filter outputs.
//
// Latency: sample to registered channel flags is 4 clocks (plus the S1-not-S2
// delay when enabled). A record needs REC_W/4+2 clocks on the fast link.
//
// The partition follows the paper's board diagram. The register stage, the
// looped-back flags and the record format are this design's own choices.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// `disable iff` condition of the assertions, which lint reports as a signal
// used both ways. That is intended: the checks are off while in reset.
module ddc8dsp
  import lux_trig_pkg::*;
#(
  parameter int unsigned US = CLK_PER_US
) (
  input  logic                           clk,        // 64 MHz sample clock
  input  logic                           rst_n,
  input  logic                           ts_clk,     // 100 MHz DAQ timestamp clock
  input  logic                           ts_clr,
  input  logic [CH_PER_DDC-1:0][ADC_W-1:0] adc,
  input  ch_cfg_t [CH_PER_DDC-1:0]       ch_cfg,
  input  fsm_cfg_t                       fsm_cfg,
  // trigger map write port (host)
  input  logic                           tm_we,
  input  logic [11:0]                    tm_waddr,
  input  logic [15:0]                    tm_wdata,
  // trigger sweep (host)
  input  sweep_cfg_t                     sweep_cfg,
  output logic [31:0]                    sweep_data,
  output logic                           sweep_busy,
  output logic                           sweep_done,
  // slow link
  output logic                           loc_s1_raw,
  output logic                           loc_s1,
  output logic                           loc_s2,
  output fsm_state_e                     state,
  input  logic                           g_s1_raw,
  input  logic                           g_s1,
  input  logic                           g_s2,
  input  logic                           tb_done,
  input  logic                           tb_trig,
  // fast link
  output logic [3:0]                     fast_lanes,
  // direct lines
  output logic                           trigger,     // standalone trigger to the DAQ
  output logic                           bad_event,   // pulse: cycle ended with an upper-threshold crossing
  output logic                           drift_timeout,
  output logic                           quiet_restart
);
  logic [CH_PER_DDC-1:0] c_s1_raw, c_s1, c_s1_big, c_s2, c_s2_big;
  logic [CH_PER_DDC-1:0] r_s1_raw, r_s1, r_s1_big, r_s2, r_s2_big;
  logic [CH_PER_DDC-1:0][FOUT_W-1:0] c_s1_y, c_s2_y, r_s2_y;

  for (genvar c = 0; c < CH_PER_DDC; c++) begin : g_ch
    ddc_channel u_ch (
      .clk, .rst_n, .cfg(ch_cfg[c]), .s1_not_s2_en(fsm_cfg.s1_not_s2), .x(adc[c]),
      .s1_raw(c_s1_raw[c]), .s1_found(c_s1[c]), .s1_big(c_s1_big[c]),
      .s2_found(c_s2[c]), .s2_big(c_s2_big[c]), .s1_y(c_s1_y[c]), .s2_y(c_s2_y[c]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_s1_raw <= '0; r_s1 <= '0; r_s1_big <= '0; r_s2 <= '0; r_s2_big <= '0; r_s2_y <= '0;
    end else begin
      r_s1_raw <= c_s1_raw; r_s1 <= c_s1; r_s1_big <= c_s1_big;
      r_s2 <= c_s2; r_s2_big <= c_s2_big; r_s2_y <= c_s2_y;
    end
  end

  assign loc_s1_raw = |r_s1_raw;
  assign loc_s1     = |r_s1;
  assign loc_s2     = |r_s2;

  // trigger FSM and map
  logic [15:0] map_addr;
  logic        map_bit, rec_valid, bad, map_ok;
  logic [7:0]  s1_hv, s2_hv;
  logic [2:0]  max_ch;
  logic [FOUT_W-1:0] max_val;

  trigger_fsm #(.NCH(CH_PER_DDC), .US(US)) u_fsm (
    .clk, .rst_n, .cfg(fsm_cfg),
    .g_s1_raw, .g_s1, .g_s2,
    .s1_found(r_s1), .s1_big(r_s1_big), .s2_found(r_s2), .s2_big(r_s2_big), .s2_y(r_s2_y),
    .map_addr, .map_bit, .tb_done, .tb_trig,
    .rec_valid, .s1_hv, .s2_hv, .max_ch, .max_val, .bad, .map_ok,
    .trigger, .state, .drift_timeout, .quiet_restart);

  trigger_map #(.AW(16)) u_map (
    .clk, .we(tm_we), .waddr(tm_waddr), .wdata(tm_wdata), .raddr(map_addr), .rbit(map_bit));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) bad_event <= 1'b0;
    else        bad_event <= (state == ST_LOOKUP) && bad;

  // timestamp and fast link
  logic [TS_W-1:0] ts;
  ddc_rec_t        rec;
  logic            tx_ready;

  ts_counter #(.TS_W(TS_W)) u_ts (.ts_clk, .ts_clr, .clk, .rst_n, .ts);

  always_comb begin
    rec.ts      = ts;
    rec.s1_hv   = s1_hv;
    rec.s2_hv   = s2_hv;
    rec.max_ch  = max_ch;
    rec.max_val = max_val;
    rec.bad     = bad;
    rec.map_ok  = map_ok;
  end

  fast_link_tx #(.PW(REC_W)) u_tx (
    .clk, .rst_n, .valid(rec_valid), .ready(tx_ready), .data(rec), .lanes(fast_lanes));

  // A trigger cycle is far longer than a frame, so the link is always free.
  a_tx_free: assert property (@(posedge clk) disable iff (!rst_n) rec_valid |-> tx_ready);

  trigger_sweep #(.NCH(CH_PER_DDC), .STEPS(256), .CNT_W(32)) u_sweep (
    .clk, .rst_n, .s1_y(c_s1_y), .s2_y(c_s2_y),
    .start(sweep_cfg.start), .continuous(sweep_cfg.continuous), .sel_s2(sweep_cfg.sel_s2),
    .sel_ch(sweep_cfg.sel_ch), .thr_start(sweep_cfg.thr_start), .thr_step(sweep_cfg.thr_step),
    .n_steps(sweep_cfg.n_steps), .dwell(sweep_cfg.dwell), .rd_addr(sweep_cfg.rd_addr),
    .rd_data(sweep_data), .busy(sweep_busy), .done(sweep_done));
endmodule

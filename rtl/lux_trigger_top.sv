// Complete trigger: NUM_DDC digitiser boards and the Trigger Builder.
//
// In the detector, 122 PMTs are summed in analog into 16 trigger groups (8 for
// the top array, 8 for the bottom). Two DDC-8DSP boards digitise them at
// 64 MHz and 14 bits, one board per array. Each board filters every group for
// S1-like (fast scintillation) and S2-like (slow electroluminescence) pulses
// and runs the trigger FSM. It sends hit vectors and its maximum S2 response
// to the Trigger Builder over a fast link. The boards' FSMs are kept in step by
// the slow link. The builder reduces the hit vectors to a 16-bit global hit
// vector, looks it up in its trigger map, checks where the largest S2 signal
// was, and issues the DAQ trigger.
//
// All logic runs on the 64 MHz sample clock `clk`; the 100 MHz `ts_clk` only
// drives the timestamp counters. The builder has seven link ports. Ports of
// boards that are not built (NUM_DDC..6) are tied idle, and `link_en` is
// masked to the boards present. Host configuration (thresholds, filter
// widths, FSM settings, maps, translator tables) enters on ports: the USB
// controller that writes them on the real boards is not part of this RTL.
// Trigger-map writes select a map with `tm_sel`: 0..NUM_DDC-1 are the boards,
// NUM_DDC the builder.
//
// From the paper: two boards of eight channels, the builder and its link to
// the DAQ logic module, a common timestamp clock and clear. Own choices: one
// FSM configuration shared by all boards, and the board-to-builder signalling.
module lux_trigger_top
  import lux_trig_pkg::*;
#(
  parameter int unsigned NUM_DDC     = 2,
  parameter int unsigned RATE_PERIOD = 640_000_000
) (
  input  logic                                        clk,
  input  logic                                        rst_n,
  input  logic                                        ts_clk,
  input  logic                                        ts_clr,
  input  logic [NUM_DDC-1:0][CH_PER_DDC-1:0][ADC_W-1:0] adc,
  // configuration
  input  ch_cfg_t [NUM_DDC-1:0][CH_PER_DDC-1:0]       ch_cfg,
  input  fsm_cfg_t                                    fsm_cfg,
  input  logic [TB_LINKS-1:0]                         link_en,
  input  logic [2*TB_BITS-1:0][4:0]                   tr_assign,
  input  logic [NGROUP-1:0][GCNT_W-1:0]               tr_thr,
  input  logic [TB_BITS-1:0]                          max_allow,
  input  dec_cfg_t                                    dec_cfg,
  input  logic [$clog2(NUM_DDC+1)-1:0]                tm_sel,
  input  logic                                        tm_we,
  input  logic [11:0]                                 tm_waddr,
  input  logic [15:0]                                 tm_wdata,
  input  sweep_cfg_t [NUM_DDC-1:0]                    sweep_cfg,
  output logic [NUM_DDC-1:0][31:0]                    sweep_data,
  output logic [NUM_DDC-1:0]                          sweep_busy,
  output logic [NUM_DDC-1:0]                          sweep_done,
  // outputs to the DAQ
  output logic                                        daq_trigger,
  output logic [TS_W-1:0]                             dec_ts,
  output logic [3:0]                                  xlm_lanes,
  output logic [31:0]                                 rate,
  output logic                                        rate_strobe,
  // board lines and status
  output logic [NUM_DDC-1:0]                          ddc_trigger,
  output logic [NUM_DDC-1:0]                          bad_event,
  output logic [NUM_DDC-1:0]                          s1_found_line,
  output logic [NUM_DDC-1:0]                          s2_found_line,
  output fsm_state_e [NUM_DDC-1:0]                    ddc_state,
  output logic [NUM_DDC-1:0]                          drift_timeout,
  output logic [NUM_DDC-1:0]                          quiet_restart,
  output logic [NGROUP-1:0]                           ghv,
  output logic [NGROUP-1:0][GCNT_W-1:0]               group_counts,
  output logic [15:0]                                 link_errors,
  output logic                                        desync
);
  logic [TB_LINKS-1:0][3:0] lanes;
  logic [TB_LINKS-1:0]      b_s1_raw, b_s1, b_s2;
  fsm_state_e [TB_LINKS-1:0] b_state;
  logic g_s1_raw, g_s1, g_s2, tb_done, tb_trig;
  logic [TB_LINKS-1:0] en_eff;

  assign en_eff = link_en & TB_LINKS'((1 << NUM_DDC) - 1);

  for (genvar b = 0; b < TB_LINKS; b++) begin : g_brd
    if (b < NUM_DDC) begin : g_on
      ddc8dsp u_ddc (
        .clk, .rst_n, .ts_clk, .ts_clr, .adc(adc[b]), .ch_cfg(ch_cfg[b]), .fsm_cfg,
        .tm_we(tm_we && tm_sel == ($clog2(NUM_DDC+1))'(b)), .tm_waddr, .tm_wdata,
        .sweep_cfg(sweep_cfg[b]), .sweep_data(sweep_data[b]), .sweep_busy(sweep_busy[b]),
        .sweep_done(sweep_done[b]),
        .loc_s1_raw(b_s1_raw[b]), .loc_s1(b_s1[b]), .loc_s2(b_s2[b]), .state(b_state[b]),
        .g_s1_raw, .g_s1, .g_s2, .tb_done, .tb_trig,
        .fast_lanes(lanes[b]),
        .trigger(ddc_trigger[b]), .bad_event(bad_event[b]),
        .drift_timeout(drift_timeout[b]), .quiet_restart(quiet_restart[b]));
      assign s1_found_line[b] = b_s1[b];
      assign s2_found_line[b] = b_s2[b];
      assign ddc_state[b]     = b_state[b];
    end else begin : g_off
      assign lanes[b]    = 4'h0;
      assign b_s1_raw[b] = 1'b0;
      assign b_s1[b]     = 1'b0;
      assign b_s2[b]     = 1'b0;
      assign b_state[b]  = ST_QUIET;
    end
  end

  // Standalone boards decide on their own, so their states may differ.
  logic hub_desync;
  assign desync = hub_desync && fsm_cfg.connected_tb;

  trigger_builder #(.NL(TB_LINKS), .COLLECT_TO(64), .RATE_PERIOD(RATE_PERIOD)) u_tb (
    .clk, .rst_n, .ts_clk, .ts_clr, .link_en(en_eff), .fast_lanes(lanes),
    .b_s1_raw, .b_s1, .b_s2, .b_state, .g_s1_raw, .g_s1, .g_s2, .tb_done, .tb_trig, .desync(hub_desync),
    .tr_assign, .tr_thr, .max_allow, .dec_cfg,
    .tm_we(tm_we && tm_sel == ($clog2(NUM_DDC+1))'(NUM_DDC)), .tm_waddr, .tm_wdata,
    .daq_trigger, .xlm_lanes, .rate, .rate_strobe, .link_errors, .ghv_out(ghv),
    .dec_ts, .group_counts);
endmodule

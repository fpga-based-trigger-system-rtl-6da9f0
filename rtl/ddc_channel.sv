// One trigger channel of a digitiser board.
//
// Each 64 MHz sample of the summed PMT signal feeds the S1 and the S2 filter in
// parallel. Each filter output goes to a lower/upper threshold discriminator.
// The S1 lower crossing then passes the optional S1-and-not-S2 rule. The
// outputs are per-clock levels:
//   s1_raw   S1 filter above its lower threshold (used for the quiet time)
//   s1_found S1 Found, after the optional S1-not-S2 rule
//   s1_big   S1 filter above its upper threshold
//   s2_found S2 filter above its lower threshold
//   s2_big   S2 filter above its upper threshold
//   s1_y, s2_y  the truncated filter outputs (for the maximum search and the
//               threshold sweep)
// Latency: the filter outputs for a sample appear on the clock edge after the
// one that takes the sample, and the discriminator outputs one edge later.
// s1_found adds 1 clock, plus the alignment delay when the rule is on.
//
// The structure follows the paper. The latencies are this design's own.
module ddc_channel
  import lux_trig_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  ch_cfg_t           cfg,
  input  logic              s1_not_s2_en,
  input  logic [ADC_W-1:0]  x,
  output logic              s1_raw,
  output logic              s1_found,
  output logic              s1_big,
  output logic              s2_found,
  output logic              s2_big,
  output logic [FOUT_W-1:0] s1_y,
  output logic [FOUT_W-1:0] s2_y
);
  logic s1_lo_hit;

  s1_filter u_s1 (.clk, .rst_n, .n(cfg.s1_n), .trunc(cfg.s1_trunc), .x, .y(s1_y));
  s2_filter u_s2 (.clk, .rst_n, .n(cfg.s2_n), .trunc(cfg.s2_trunc), .x, .y(s2_y));

  threshold_disc u_d1 (.clk, .rst_n, .y(s1_y), .lo(cfg.s1_lo), .hi(cfg.s1_hi),
                       .lo_hit(s1_lo_hit), .hi_hit(s1_big));
  threshold_disc u_d2 (.clk, .rst_n, .y(s2_y), .lo(cfg.s2_lo), .hi(cfg.s2_hi),
                       .lo_hit(s2_found), .hi_hit(s2_big));

  s1_not_s2 u_sns (.clk, .rst_n, .en(s1_not_s2_en), .s1_n(cfg.s1_n), .s2_n(cfg.s2_n),
                   .s1_hit(s1_lo_hit), .s2_hit(s2_found), .s1_found);

  assign s1_raw = s1_lo_hit;
endmodule

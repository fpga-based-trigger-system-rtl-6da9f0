// Shared types and constants of the LUX-style trigger.
//
// The trigger runs on the 64 MHz sample clock of the digitiser boards. Each
// digitiser board (DDC) carries 8 trigger channels; a 14-bit ADC sample enters
// every clock. This package holds the configuration records written by the
// host before a run, the trigger-mode encoding and the record each board sends
// to the Trigger Builder at the end of a trigger cycle.
//
// Numbers that come from the paper: 64 MHz sampling, 14-bit samples, 8
// channels per board, 16-bit thresholds and the register ranges (S1 length
// 1..16, S2 length 1..64, quiet time and hold-off in 1 us steps up to 65 ms,
// coincidence window in ~32 ns steps up to 8 us, drift time in one-sample steps
// up to 1.024 ms, truncation 0..6 bits), the three trigger modes, and a 48-bit
// timestamp kept in a DSP48A-style counter. Field widths are chosen to hold
// those ranges; the packing order of records is this design's own choice.
package lux_trig_pkg;

  localparam int unsigned ADC_W      = 14;  // ADC resolution
  localparam int unsigned CH_PER_DDC = 8;   // trigger channels per board
  localparam int unsigned FOUT_W     = 16;  // filter output after truncation
  localparam int unsigned TS_W       = 48;  // timestamp width
  localparam int unsigned CLK_PER_US = 64;  // 64 MHz clock ticks per microsecond
  localparam int unsigned HOLDOFF_MIN_US = 4;

  typedef enum logic [1:0] {
    MODE_S1   = 2'd0,   // S1Mode
    MODE_S2   = 2'd1,   // S2Mode
    MODE_S1S2 = 2'd2    // S1&S2Mode
  } trig_mode_e;

  // States of the board trigger FSM (shared over the slow link).
  typedef enum logic [2:0] {
    ST_QUIET   = 3'd0,  // waiting for the quiet-time requirement
    ST_ARMED   = 3'd1,  // waiting for the first pulse
    ST_S1_WIN  = 3'd2,  // S1 coincidence window
    ST_DRIFT   = 3'd3,  // S1&S2Mode: waiting up to the drift time for an S2
    ST_S2_WIN  = 3'd4,  // S2 coincidence window
    ST_LOOKUP  = 3'd5,  // trigger-map read
    ST_WAIT_TB = 3'd6,  // waiting for the Trigger Builder's decision
    ST_HOLDOFF = 3'd7   // hold-off after a trigger
  } fsm_state_e;

  // Per-channel settings.
  typedef struct packed {
    logic [15:0] s1_lo;     // S1 lower threshold (ADC counts of filter output)
    logic [15:0] s1_hi;     // S1 upper threshold
    logic [15:0] s2_lo;     // S2 lower threshold
    logic [15:0] s2_hi;     // S2 upper threshold
    logic [4:0]  s1_n;      // S1 filter width n, 1..16 samples
    logic [6:0]  s2_n;      // S2 side-lobe width n, 1..64 samples (main = 4n)
    logic [2:0]  s1_trunc;  // S1 output right shift, 0..6 bits
    logic [2:0]  s2_trunc;  // S2 output right shift, 0..6 bits
  } ch_cfg_t;

  // Board-wide settings of the trigger FSM.
  typedef struct packed {
    trig_mode_e  mode;
    logic        connected_tb; // wait for the Trigger Builder's decision
    logic        bypass_quiet; // skip the quiet-time requirement
    logic        s1_not_s2;    // S1 Found = S1 and not S2
    logic [8:0]  s1_cw;        // S1 coincidence window, units of 2 clocks (32 ns)
    logic [8:0]  s2_cw;        // S2 coincidence window, units of 2 clocks (32 ns)
    logic [15:0] quiet_us;     // quiet time, 0..65535 us
    logic [15:0] max_drift;    // drift time limit = max_drift+1 clocks
    logic [15:0] holdoff_us;   // hold-off, 4..65535 us (smaller values read as 4)
  } fsm_cfg_t;

  // Threshold-sweep control of one board.
  typedef struct packed {
    logic        start;
    logic        continuous;
    logic        sel_s2;      // 0: S1 filter, 1: S2 filter
    logic [2:0]  sel_ch;
    logic [15:0] thr_start;
    logic [15:0] thr_step;
    logic [8:0]  n_steps;     // 1..256
    logic [31:0] dwell;       // clocks per threshold step
    logic [7:0]  rd_addr;
  } sweep_cfg_t;

  // Reduced quantities of one trigger cycle of one board.
  typedef struct packed {
    logic [TS_W-1:0]       ts;       // timestamp at the end of the cycle
    logic [CH_PER_DDC-1:0] s1_hv;    // S1 hit vector
    logic [CH_PER_DDC-1:0] s2_hv;    // S2 hit vector
    logic [2:0]            max_ch;   // channel with the largest S2 response
    logic [FOUT_W-1:0]     max_val;  // its value
    logic                  bad;      // an upper threshold was crossed
    logic                  map_ok;   // this board's trigger map accepted the cycle
  } ddc_rec_t;

  localparam int unsigned REC_W = $bits(ddc_rec_t);

  // Trigger Builder.
  localparam int unsigned TB_LINKS = 7;                 // digitiser boards it can serve
  localparam int unsigned TB_BITS  = TB_LINKS*CH_PER_DDC; // 56 hit bits per vector
  localparam int unsigned NGROUP   = 16;                // hit counters / global hit-vector bits
  localparam int unsigned GCNT_W   = 7;                 // hit counter width (up to 112 hits)

  // Builder decision settings.
  typedef struct packed {
    logic use_max;       // require the maximum S2 to lie in an allowed group
    logic veto_bad;      // reject cycles in which an upper threshold was crossed
    logic need_ddc_map;  // also require every board's own map bit
  } dec_cfg_t;

  // Record sent to the DAQ logic module for each decision.
  typedef struct packed {
    logic [TS_W-1:0]    ts;        // decision timestamp
    logic [NGROUP-1:0]  ghv;       // global (translated) hit vector
    logic [TB_BITS-1:0] s1_hv;     // all boards' S1 hit vectors, board 0 lowest
    logic [TB_BITS-1:0] s2_hv;
    logic [5:0]         max_idx;   // board*8 + channel of the largest S2
    logic [FOUT_W-1:0]  max_val;
    logic               bad;
    logic               trig;      // the decision
  } xlm_rec_t;

endpackage

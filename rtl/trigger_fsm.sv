// Trigger finite state machine of one digitiser board (S1Mode, S2Mode and
// S1&S2Mode).
//
// A trigger cycle runs through these states:
//   QUIET    The detector must stay quiet for `quiet_us` microseconds: no S1
//            lower-threshold crossing on any channel, whatever the mode. Any
//            crossing restarts the count. It is skipped when `bypass_quiet`
//            is set or `quiet_us` is 0.
//   ARMED    The first S1 Found (S1Mode, S1&S2Mode) or S2 Found (S2Mode) opens
//            the coincidence window.
//   S1_WIN   For 2*s1_cw clocks the S1 Found of each channel is OR-ed into the
//   S2_WIN   S1 hit vector. S2_WIN does the same for S2 over 2*s2_cw clocks,
//            and also records which channel shows the largest S2 filter
//            output, and its value. An upper-threshold crossing during a
//            window marks the cycle as bad.
//   DRIFT    S1&S2Mode only: after the S1 window, up to max_drift+1 clocks
//            may pass before an S2 must appear. If none does, the cycle is
//            dropped and the FSM returns to QUIET. If one does, the S2 window
//            opens.
//   LOOKUP   The two hit vectors, concatenated {S1, S2}, address the board's
//            trigger map (one clock read).
//   WAIT_TB  When the board is connected to the Trigger Builder, the board's
//            record is handed to the fast link, and the FSM waits for the
//            builder's done/trigger reply on the slow link. A standalone
//            board decides itself: it triggers when its map bit is 1 and the
//            cycle is not bad.
//   HOLDOFF  After a trigger, a hold-off of max(holdoff_us, 4) microseconds
//            follows, during which no new cycle starts.
//
// The state transitions use the board-wide flags g_* that all boards share over
// the slow link, so all boards step through the same states on the same clock.
// The hit vectors and the maximum are built from this board's own channels.
// One microsecond is CLK_PER_US = 64 clocks. A window unit is 2 clocks
// (31.25 ns, the paper's "32 ns"), so 64 units give the 2 us window used in the
// WIMP search.
//
// From the paper: the states, the quiet, window, drift and hold-off rules and
// their ranges, hit vectors, the maximum S2 record, the map address. Own
// choices: state encoding; that the start cycle belongs to the window; that a
// window of 0 units lasts 2 clocks; that a cycle which the map rejects returns
// to QUIET without a hold-off; that bad cycles are rejected in standalone mode.
//
// The s1_not_s2 field of the configuration is not read here: that rule is
// applied in each channel before the FSM sees the S1 flags.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// `disable iff` condition of the assertions, which lint reports as a signal
// used both ways. That is intended: the checks are off while in reset.
module trigger_fsm
  import lux_trig_pkg::*;
#(
  parameter int unsigned NCH = CH_PER_DDC,
  parameter int unsigned US  = CLK_PER_US    // clocks per microsecond
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  fsm_cfg_t                  cfg,
  // board-wide flags from the slow link
  input  logic                      g_s1_raw,
  input  logic                      g_s1,
  input  logic                      g_s2,
  // this board's channels
  input  logic [NCH-1:0]            s1_found,
  input  logic [NCH-1:0]            s1_big,
  input  logic [NCH-1:0]            s2_found,
  input  logic [NCH-1:0]            s2_big,
  input  logic [NCH-1:0][FOUT_W-1:0] s2_y,
  // trigger map
  output logic [2*NCH-1:0]          map_addr,
  input  logic                      map_bit,
  // Trigger Builder reply
  input  logic                      tb_done,
  input  logic                      tb_trig,
  // results
  output logic                      rec_valid,   // one-clock pulse, record fields valid
  output logic [NCH-1:0]            s1_hv,
  output logic [NCH-1:0]            s2_hv,
  output logic [$clog2(NCH)-1:0]    max_ch,
  output logic [FOUT_W-1:0]         max_val,
  output logic                      bad,
  output logic                      map_ok,
  output logic                      trigger,     // standalone trigger pulse
  output fsm_state_e                state,
  output logic                      drift_timeout, // pulse: S1&S2 cycle dropped
  output logic                      quiet_restart  // pulse: activity restarted the quiet time
);
  localparam int unsigned CW = $clog2(NCH);

  fsm_state_e nstate;
  logic [$clog2(US)-1:0] pre;      // microsecond prescaler
  logic [15:0]           us_cnt;
  logic [16:0]           clk_cnt;
  logic                  us_tick;
  logic [16:0]           s1_len, s2_len;
  logic [15:0]           hold_len;
  logic                  start_evt;

  // largest S2 output among this board's channels this clock
  logic [CW-1:0]     cur_ch;
  logic [FOUT_W-1:0] cur_val;
  always_comb begin
    cur_ch  = '0;
    cur_val = s2_y[0];
    for (int k = 1; k < NCH; k++)
      if (s2_y[k] > cur_val) begin
        cur_val = s2_y[k];
        cur_ch  = CW'(k);
      end
  end

  always_comb begin
    us_tick  = (pre == $clog2(US)'(US-1));
    s1_len   = (cfg.s1_cw == 0) ? 17'd2 : {7'd0, cfg.s1_cw, 1'b0};
    s2_len   = (cfg.s2_cw == 0) ? 17'd2 : {7'd0, cfg.s2_cw, 1'b0};
    hold_len = (cfg.holdoff_us < 16'(HOLDOFF_MIN_US)) ? 16'(HOLDOFF_MIN_US) : cfg.holdoff_us;
    start_evt = (cfg.mode == MODE_S2) ? g_s2 : g_s1;
  end

  always_comb begin
    nstate = state;
    unique case (state)
      ST_QUIET:   if (cfg.bypass_quiet || cfg.quiet_us == 0 ||
                      (!g_s1_raw && us_tick && us_cnt + 1'b1 >= cfg.quiet_us))
                    nstate = ST_ARMED;
      ST_ARMED:   if (start_evt) nstate = (cfg.mode == MODE_S2) ? ST_S2_WIN : ST_S1_WIN;
      ST_S1_WIN:  if (clk_cnt + 1'b1 >= s1_len)
                    nstate = (cfg.mode == MODE_S1S2) ? ST_DRIFT : ST_LOOKUP;
      ST_DRIFT:   if (g_s2) nstate = ST_S2_WIN;
                  else if (clk_cnt >= {1'b0, cfg.max_drift}) nstate = ST_QUIET;
      ST_S2_WIN:  if (clk_cnt + 1'b1 >= s2_len) nstate = ST_LOOKUP;
      ST_LOOKUP:  if (cfg.connected_tb) nstate = ST_WAIT_TB;
                  else nstate = (map_bit && !bad) ? ST_HOLDOFF : ST_QUIET;
      ST_WAIT_TB: if (tb_done) nstate = tb_trig ? ST_HOLDOFF : ST_QUIET;
      ST_HOLDOFF: if (us_tick && us_cnt + 1'b1 >= hold_len) nstate = ST_QUIET;
      default:    nstate = ST_QUIET;
    endcase
  end

  assign map_addr = {s1_hv, s2_hv};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_QUIET;
      pre <= '0; us_cnt <= '0; clk_cnt <= '0;
      s1_hv <= '0; s2_hv <= '0; max_ch <= '0; max_val <= '0;
      bad <= 1'b0; map_ok <= 1'b0;
      rec_valid <= 1'b0; trigger <= 1'b0;
      drift_timeout <= 1'b0; quiet_restart <= 1'b0;
    end else begin
      state         <= nstate;
      rec_valid     <= 1'b0;
      trigger       <= 1'b0;
      drift_timeout <= 1'b0;
      quiet_restart <= 1'b0;
      // timers restart on every state change
      if (nstate != state) begin
        pre <= '0; us_cnt <= '0; clk_cnt <= '0;
      end else begin
        pre     <= us_tick ? '0 : pre + 1'b1;
        us_cnt  <= us_tick ? us_cnt + 1'b1 : us_cnt;
        clk_cnt <= clk_cnt + 1'b1;
      end

      unique case (state)
        ST_QUIET: begin
          if (g_s1_raw && !(cfg.bypass_quiet || cfg.quiet_us == 0)) begin
            pre <= '0; us_cnt <= '0;
            quiet_restart <= 1'b1;
          end
        end
        ST_ARMED: begin
          s1_hv <= '0; s2_hv <= '0; max_ch <= '0; max_val <= '0; bad <= 1'b0;
          if (start_evt) begin
            if (cfg.mode == MODE_S2) begin
              s2_hv   <= s2_found;
              bad     <= |s2_big;
              max_ch  <= cur_ch;
              max_val <= cur_val;
            end else begin
              s1_hv <= s1_found;
              bad   <= |s1_big;
            end
          end
        end
        ST_S1_WIN: begin
          s1_hv <= s1_hv | s1_found;
          bad   <= bad | (|s1_big);
        end
        ST_DRIFT: begin
          if (g_s2) begin
            s2_hv   <= s2_found;
            bad     <= bad | (|s2_big);
            max_ch  <= cur_ch;
            max_val <= cur_val;
          end
          if (nstate == ST_QUIET) drift_timeout <= 1'b1;
        end
        ST_S2_WIN: begin
          s2_hv <= s2_hv | s2_found;
          bad   <= bad | (|s2_big);
          if (cur_val > max_val) begin
            max_val <= cur_val;
            max_ch  <= cur_ch;
          end
        end
        ST_LOOKUP: begin
          map_ok <= map_bit;
          if (cfg.connected_tb) rec_valid <= 1'b1;
          else trigger <= map_bit && !bad;
        end
        default: ;
      endcase
    end
  end

// A record goes to the Trigger Builder only in connected mode, and a board
  // triggers on its own only when standalone.
  a_rec_mode: assert property (@(posedge clk) disable iff (!rst_n) rec_valid |-> cfg.connected_tb);
  a_trg_mode: assert property (@(posedge clk) disable iff (!rst_n) trigger |-> !cfg.connected_tb);
endmodule

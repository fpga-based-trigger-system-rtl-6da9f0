// Slow link hub in the Trigger Builder.
//
// The slow link is a set of single-ended, bidirectional lines in each
// board-to-builder cable. It shares the trigger FSM's state between the
// boards. Each digitiser board reports, every clock, whether any of its
// channels sees an S1 lower-threshold crossing, an S1 Found or an S2 Found, and
// the state of its FSM. The hub ORs the flags of the enabled boards into
// board-wide flags and returns them to every board. All boards therefore
// apply the quiet-time, window-start and drift rules to the same flags and
// move through their FSMs in step. The hub also passes the builder's decision
// (done, trigger) back to the boards. It raises `desync` when two enabled
// boards report different FSM states, which means a cable or board fault.
// Everything is combinational; the boards register what they send.
//
// From the paper: the slow link exists to communicate FSM states across the
// boards. Own choices: which flags are shared, and the desync check.
module slow_link_hub
  import lux_trig_pkg::*;
#(
  parameter int unsigned NB = 7
) (
  input  logic [NB-1:0]      en,
  input  logic [NB-1:0]      b_s1_raw,
  input  logic [NB-1:0]      b_s1,
  input  logic [NB-1:0]      b_s2,
  input  fsm_state_e [NB-1:0] b_state,
  input  logic               dec_done,
  input  logic               dec_trig,
  output logic               g_s1_raw,
  output logic               g_s1,
  output logic               g_s2,
  output logic               tb_done,
  output logic               tb_trig,
  output logic               desync
);
  always_comb begin
    g_s1_raw = |(b_s1_raw & en);
    g_s1     = |(b_s1 & en);
    g_s2     = |(b_s2 & en);
    tb_done  = dec_done;
    tb_trig  = dec_trig;
    desync   = 1'b0;
    for (int i = 0; i < NB; i++)
      for (int j = i + 1; j < NB; j++)
        if (en[i] && en[j] && b_state[i] != b_state[j]) desync = 1'b1;
  end
endmodule

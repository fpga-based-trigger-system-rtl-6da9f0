// S1 identification with the optional "S1 = S1 and not S2" rule.
//
// The S1 filter also responds to the sharp leading edge of an S2 pulse. When
// `en` is set, the S1 lower-threshold crossing is delayed until it lines up
// with the S2 filter's response to the same light. It then counts as S1 Found
// only if the S2 lower threshold is not crossed at that moment. When `en` is
// clear, S1 Found is the S1 crossing itself.
//
// Alignment: the S1 filter crosses its threshold when the leading edge of a
// pulse has passed its first side lobe, n1 samples after the edge. The S2
// filter responds most strongly to a pulse that fills its main lobe, i.e.
// n2 + m2 = 5*n2 samples after that pulse's leading edge. Both filters have the
// same pipeline latency, so the S1 crossing is delayed by
// D = 5*n2 - n1 (0 if negative). The S1 flags that an S2 pulse produces at its
// start then meet the S2 filter near its peak. A shift register of DMAX bits
// holds the history of the crossing.
//
// A rectangular or slowly falling S2 pulse also makes the S1 filter respond at
// its trailing edge, which after the delay falls just behind the S2 response.
// The S2 crossing is therefore stretched: a delayed S1 crossing is dropped if
// the S2 threshold was crossed in the last 6*n2 clocks (the S2 filter length).
//
// Interface: level inputs and output, one per clock. `s1_found` is registered,
// so its latency is D+1 clocks after `s1_hit`.
//
// From the paper: the rule, and that the S1 response is delayed to align with
// the S2 response, so that S1 Found depends on both filter lengths. Own
// choice: the alignment formula (the paper gives none), the S2 stretch and
// DMAX = 5*64.
module s1_not_s2 #(
  parameter int unsigned DMAX = 320
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic [4:0] s1_n,
  input  logic [6:0] s2_n,
  input  logic       s1_hit,
  input  logic       s2_hit,
  output logic       s1_found
);
  localparam int unsigned DW = $clog2(DMAX);

  logic [DMAX-1:0] hist;   // hist[k] = s1_hit k+1 clocks ago
  int              d_calc;
  logic [DW-1:0]   d;
  logic            s1_dly;
  logic [8:0]      s2_recent;   // clocks left in the stretched S2 hit

  always_comb begin
    d_calc = 5*int'(s2_n) - int'(s1_n);
    if (d_calc < 0)              d = '0;
    else if (d_calc > DMAX)      d = DW'(DMAX);
    else                         d = DW'(d_calc);
    s1_dly = (d == '0) ? s1_hit : hist[d - 1'b1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist     <= '0;
      s1_found <= 1'b0;
      s2_recent <= '0;
    end else begin
      hist     <= {hist[DMAX-2:0], s1_hit};
      s1_found <= en ? (s1_dly & ~s2_hit & (s2_recent == '0)) : s1_hit;
      if (s2_hit)               s2_recent <= 9'(6 * int'(s2_n));
      else if (s2_recent != '0) s2_recent <= s2_recent - 1'b1;
    end
  end
endmodule

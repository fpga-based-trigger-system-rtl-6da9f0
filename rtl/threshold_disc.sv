// Lower/upper threshold discriminator for one filter output.
//
// `lo_hit` is high while the filter output is above the lower threshold: a
// pulse is present. `hi_hit` is high while it is above the upper threshold,
// which marks a pulse too large for the event selection (such an event can be
// vetoed). Both thresholds are 16-bit unsigned, 0..65535, like the board's
// configuration registers. Outputs are registered (latency 1).
//
// From the paper: lower and upper thresholds with a 0..65535 range (the
// configuration panel) and the veto of large pulses. Own choices: a strict
// "greater than" comparison, so that a threshold of 65535 can never fire.
module threshold_disc #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] y,
  input  logic [W-1:0] lo,
  input  logic [W-1:0] hi,
  output logic         lo_hit,
  output logic         hi_hit
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lo_hit <= 1'b0;
      hi_hit <= 1'b0;
    end else begin
      lo_hit <= (y > lo);
      hi_hit <= (y > hi);
    end
  end
endmodule

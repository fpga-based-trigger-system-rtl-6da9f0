// Maximum detector of the Trigger Builder.
//
// Each board reports the channel with its largest S2 filter response in the
// trigger cycle, and that value. On `start` the detector compares the reports
// of the boards that took part (`present`) and finds the trigger group with the
// largest response overall. Its index is board*8 + channel. `max_ok` says
// whether that group is in the user's `allow` mask, e.g. the groups of top
// PMTs above the fiducial volume. Events whose largest signal lies in an outer
// group are then rejected. Leaving the inner-corner group T4 out of the mask
// gave the best fiducial-volume edge. Ties go to the lower index. The result
// is registered: `done` pulses one clock after `start`.
//
// From the paper: tracking the group with the maximum filter response and
// accepting only when it belongs to chosen groups. Own choices: the mask
// representation and tie rule.
module max_detector
  import lux_trig_pkg::*;
#(
  parameter int unsigned NB = TB_LINKS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [NB-1:0]              present,
  input  logic [NB-1:0][2:0]         b_max_ch,
  input  logic [NB-1:0][FOUT_W-1:0]  b_max_val,
  input  logic [NB*8-1:0]            allow,
  output logic                       done,
  output logic [5:0]                 max_idx,
  output logic [FOUT_W-1:0]          max_val,
  output logic                       max_ok
);
  logic [5:0]        c_idx;
  logic [FOUT_W-1:0] c_val;
  logic              c_any;

  always_comb begin
    c_idx = '0;
    c_val = '0;
    c_any = 1'b0;
    for (int b = 0; b < NB; b++)
      if (present[b] && (!c_any || b_max_val[b] > c_val)) begin
        c_any = 1'b1;
        c_val = b_max_val[b];
        c_idx = 6'(b*8) + 6'(b_max_ch[b]);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0; max_idx <= '0; max_val <= '0; max_ok <= 1'b0;
    end else begin
      done <= start;
      if (start) begin
        max_idx <= c_idx;
        max_val <= c_val;
        max_ok  <= c_any && allow[c_idx];
      end
    end
  end
endmodule

// Final trigger decision of the Trigger Builder.
//
// When `go` pulses, the builder's trigger map bit for the global hit vector
// is valid. It is combined with the maximum detector and with the boards'
// own results:
//   trig = tm_bit
//          and (max_ok            if use_max)
//          and (not any_bad       if veto_bad)
//          and (all board map bits if need_ddc_map)
// One clock after `go` the module raises `done` for one clock, with `trig`
// holding the decision. These two go back to the boards on the slow link.
// If the decision is positive, `daq_trigger` goes high for TRIG_LEN clocks
// and `dec_ts` holds the timestamp of the decision.
//
// From the paper: the map result combined with the maximum filter response
// into a final decision, sent to the DAQ and time-stamped. Own choices: the
// optional bad veto and board-map requirement, pulse length.
module trigger_decision
  import lux_trig_pkg::*;
#(
  parameter int unsigned TRIG_LEN = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  dec_cfg_t         cfg,
  input  logic             go,
  input  logic             tm_bit,
  input  logic             max_ok,
  input  logic             any_bad,
  input  logic             all_ddc_map,
  input  logic [TS_W-1:0]  ts,
  output logic             done,
  output logic             trig,
  output logic             daq_trigger,
  output logic [TS_W-1:0]  dec_ts
);
  logic                          ok;
  logic [$clog2(TRIG_LEN+1)-1:0] pw;

  always_comb
    ok = tm_bit && (max_ok || !cfg.use_max) && (!any_bad || !cfg.veto_bad) &&
         (all_ddc_map || !cfg.need_ddc_map);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0; trig <= 1'b0; pw <= '0; dec_ts <= '0;
    end else begin
      done <= go;
      if (go) begin
        trig <= ok;
        if (ok) begin
          pw     <= ($clog2(TRIG_LEN+1))'(TRIG_LEN);
          dec_ts <= ts;
        end
      end else if (pw != '0) begin
        pw <= pw - 1'b1;
      end
    end
  end

  assign daq_trigger = (pw != '0);
endmodule

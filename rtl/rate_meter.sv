// Trigger rate meter.
//
// Counts trigger pulses over fixed periods of PERIOD clocks (ten seconds at
// 64 MHz by default). At the end of each period the count moves to `rate`
// and `strobe` pulses; count/10 is the average rate in Hz for the default
// period. The slow-control system reads these averages to watch the
// detector's stability. A rising edge of `trig_in` counts once.
//
// From the paper: an average trigger rate over ten-second periods. Own
// choices: edge counting, widths, that this is done in logic.
module rate_meter #(
  parameter int unsigned PERIOD = 640_000_000,
  parameter int unsigned CNT_W  = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             trig_in,
  output logic [CNT_W-1:0] rate,
  output logic             strobe
);
  logic [$clog2(PERIOD)-1:0] t;
  logic [CNT_W-1:0]          cnt;
  logic                      trig_q;
  logic                      edge_in;

  assign edge_in = trig_in && !trig_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t <= '0; cnt <= '0; rate <= '0; strobe <= 1'b0; trig_q <= 1'b0;
    end else begin
      trig_q <= trig_in;
      strobe <= 1'b0;
      if (t == ($clog2(PERIOD))'(PERIOD-1)) begin
        t      <= '0;
        rate   <= cnt + CNT_W'(edge_in);
        cnt    <= '0;
        strobe <= 1'b1;
      end else begin
        t <= t + 1'b1;
        if (edge_in && cnt != '1) cnt <= cnt + 1'b1;
      end
    end
  end
endmodule

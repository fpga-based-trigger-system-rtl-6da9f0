// Trigger sweep: measures how often a filter output crosses a threshold, for a
// series of thresholds, while the trigger keeps running.
//
// A sweep watches one channel's S1 or S2 filter output (`sel_s2`, `sel_ch`).
// It steps a private threshold through `n_steps` values, thr_k = thr_start +
// k*thr_step. At each step it counts, for `dwell` clocks, the rising edges of
// (output > thr_k), i.e. the number of pulses seen. The count goes to entry k
// of a result memory that the host reads through `rd_addr`/`rd_data`. A plot
// of count against threshold shows the noise and pulse rates of the channel,
// which is how unexpected pick-up is found. The sweep has its own comparator,
// so it does not disturb the trigger. `start` begins a sweep; `done` pulses at
// its end, and with `continuous` set the next sweep starts at once.
//
// From the paper: rate of pulses seen by the S1 and S2 filters as a function of
// threshold, measured in the background. Own choices: one channel at a time,
// linear threshold steps, rising-edge counting, counter widths.
module trigger_sweep
  import lux_trig_pkg::*;
#(
  parameter int unsigned NCH    = CH_PER_DDC,
  parameter int unsigned STEPS  = 256,   // result memory depth
  parameter int unsigned CNT_W  = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [NCH-1:0][FOUT_W-1:0]   s1_y,
  input  logic [NCH-1:0][FOUT_W-1:0]   s2_y,
  input  logic                         start,
  input  logic                         continuous,
  input  logic                         sel_s2,
  input  logic [$clog2(NCH)-1:0]       sel_ch,
  input  logic [FOUT_W-1:0]            thr_start,
  input  logic [FOUT_W-1:0]            thr_step,
  input  logic [$clog2(STEPS+1)-1:0]   n_steps,
  input  logic [31:0]                  dwell,
  input  logic [$clog2(STEPS)-1:0]     rd_addr,
  output logic [CNT_W-1:0]             rd_data,
  output logic                         busy,
  output logic                         done
);
  localparam int unsigned SW = $clog2(STEPS);

  logic [CNT_W-1:0]  res [STEPS];
  logic [FOUT_W-1:0] y, thr;
  logic [16:0]       thr_sum;
  logic              above, above_q;
  logic [CNT_W-1:0]  cnt;
  logic [31:0]       tmr;
  logic [SW:0]       step;

  always_comb begin
    y     = sel_s2 ? s2_y[sel_ch] : s1_y[sel_ch];
    above = (y > thr);
  end

  always_ff @(posedge clk) begin
    if (busy && tmr + 1 >= dwell) res[step[SW-1:0]] <= cnt + CNT_W'(above && !above_q);
    rd_data <= res[rd_addr];
  end

  always_comb thr_sum = {1'b0, thr} + {1'b0, thr_step};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0; tmr <= '0; step <= '0;
      thr <= '0; above_q <= 1'b0;
    end else begin
      done    <= 1'b0;
      above_q <= above;
      if (!busy) begin
        if (start && n_steps != 0) begin
          busy <= 1'b1; step <= '0; tmr <= '0; cnt <= '0; thr <= thr_start;
          above_q <= 1'b1;   // a pulse already in progress is not counted
        end
      end else if (tmr + 1 >= dwell) begin
        tmr <= '0;
        cnt <= '0;
        above_q <= 1'b1;
        if (step + 1'b1 >= (SW+1)'(n_steps)) begin
          done <= 1'b1;
          step <= '0;
          thr  <= thr_start;
          busy <= continuous;
        end else begin
          step <= step + 1'b1;
          thr  <= thr_sum[16] ? 16'hFFFF : thr_sum[15:0];
        end
      end else begin
        tmr <= tmr + 1;
        if (above && !above_q && cnt != '1) cnt <= cnt + 1'b1;
      end
    end
  end
endmodule

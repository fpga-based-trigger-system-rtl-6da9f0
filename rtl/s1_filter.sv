// S1 pulse filter of one trigger channel.
//
// The paper's Eq. 1 with A = 1, B = 0.5 and m = n: two side lobes of weight
// 1/2 around a main lobe of weight 1, each n samples wide. n is programmable
// 1..16 samples (15.6..250 ns at 64 MHz). The filter subtracts the baseline,
// and its peak is proportional to the area of a negative-going PMT pulse in
// ADC counts. The core computes 2*h with integer weights (1, 2), so the wrapper
// shifts right by one bit plus the programmable truncation (0..6 bits, as in
// the board's configuration panel). It then clamps the result to 0..65535,
// the range of the 16-bit thresholds.
//
// Interface: `x` is one 14-bit sample per clock. `n` is clamped to 1..16; any
// change of `n` restarts the filter with an empty history. `y` is unsigned
// 16-bit, one register after the core: after the edge that takes sample i+1,
// y holds the result for sample i.
//
// From the paper: coefficients, lobe widths, range of n, truncation range.
// Own choices: clamping negative outputs to zero and saturating at 65535.
module s1_filter #(
  parameter int unsigned N_MAX = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  n,
  input  logic [2:0]  trunc,
  input  logic [lux_trig_pkg::ADC_W-1:0] x,
  output logic [lux_trig_pkg::FOUT_W-1:0] y
);
  localparam int unsigned ACC_W = 28;
  localparam int unsigned N_W   = $clog2(N_MAX+1);

  logic [N_W-1:0] n_eff, n_q;
  logic           clr;
  logic signed [ACC_W-1:0] h2, h_sh;

  always_comb begin
    if (n == '0)                  n_eff = N_W'(1);
    else if (32'(n) > N_MAX)      n_eff = N_W'(N_MAX);
    else                          n_eff = N_W'(n);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) n_q <= '0;
    else        n_q <= n_eff;

  assign clr = (n_q != n_eff);

  lobe_filter #(.X_W(lux_trig_pkg::ADC_W), .N_MAX(N_MAX), .M_MUL(1), .WS(1), .WM(2),
                .ACC_W(ACC_W)) u_core (
    .clk, .rst_n, .clr, .n(n_eff), .x, .y(h2));

  always_comb begin
    h_sh = h2 >>> (32'(trunc) + 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 y <= '0;
    else if (h_sh < 0)          y <= '0;
    else if (h_sh > 65535)      y <= 16'hFFFF;
    else                        y <= h_sh[15:0];
  end
endmodule

// S2 pulse filter of one trigger channel.
//
// The paper's Eq. 1 with A = 1, B = 2 and m = 4n: a main lobe 4n samples wide
// with weight 1, flanked by side lobes n samples wide with weight 2. n is
// programmable 1..64, so the main lobe spans 62.5 ns to 4 us at 64 MHz. The
// narrow side lobes halve the delay line an equal-lobe filter of the same main
// width would need. The weights are integers, so the core output is h itself.
// The wrapper shifts it right by the programmable truncation (0..6 bits) and
// clamps it to 0..65535.
//
// Interface: one 14-bit sample per clock. `n` is clamped to 1..64; any change
// of `n` restarts the filter with an empty history. `y` is unsigned 16-bit
// one register after the core: after the edge that takes sample i+1, y holds
// the result for sample i.
//
// From the paper: coefficients, lobe ratio 4:1, range of n, truncation range.
// Own choices: clamping and saturation.
module s2_filter #(
  parameter int unsigned N_MAX = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [6:0]  n,
  input  logic [2:0]  trunc,
  input  logic [lux_trig_pkg::ADC_W-1:0] x,
  output logic [lux_trig_pkg::FOUT_W-1:0] y
);
  localparam int unsigned ACC_W = 28;
  localparam int unsigned N_W   = $clog2(N_MAX+1);

  logic [N_W-1:0] n_eff, n_q;
  logic           clr;
  logic signed [ACC_W-1:0] h, h_sh;

  always_comb begin
    if (n == '0)                  n_eff = N_W'(1);
    else if (32'(n) > N_MAX)      n_eff = N_W'(N_MAX);
    else                          n_eff = N_W'(n);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) n_q <= '0;
    else        n_q <= n_eff;

  assign clr = (n_q != n_eff);

  lobe_filter #(.X_W(lux_trig_pkg::ADC_W), .N_MAX(N_MAX), .M_MUL(4), .WS(2), .WM(1),
                .ACC_W(ACC_W)) u_core (
    .clk, .rst_n, .clr, .n(n_eff), .x, .y(h));

  always_comb h_sh = h >>> trunc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 y <= '0;
    else if (h_sh < 0)          y <= '0;
    else if (h_sh > 65535)      y <= 16'hFFFF;
    else                        y <= h_sh[15:0];
  end
endmodule

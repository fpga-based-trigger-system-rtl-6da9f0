// Three-lobe, zero-weight FIR filter (the paper's Eq. 1), computed with
// running sums.
//
//   h(i) = WS*sum(x(i-2n-m+1 .. i-n-m)) - WM*sum(x(i-n-m+1 .. i-n))
//        + WS*sum(x(i-n+1 .. i))
//
// with m = M_MUL*n. WS and WM are integer side and main weights: the paper's
// B and A scaled so that both are integers. The wrapper divides the scale out
// again. A circular delay line holds the last N_MAX*(2+M_MUL) samples. Each
// lobe keeps a running sum: each clock the sample entering the lobe is added
// and the one leaving it is subtracted, so each output costs three taps and
// six additions, whatever n is. Taps that reach back before the first sample
// after reset or `clr` read as zero. The running sums are therefore exact
// from the first sample, and a new n takes effect cleanly after a `clr`.
//
// Interface: one sample `x` per clock (unsigned ADC code; since the weights sum
// to zero, the ADC baseline cancels). The output `y` is registered: after the
// clock edge that takes sample x(i), y = h(i). It reads 0 until 2n+m samples
// have been taken since reset or `clr`. `n` must be in 1..N_MAX; the wrapper
// clamps it.
//
// From the paper: the filter equation, the lobe structure and the need for
// zero total weight. Own choices: running-sum implementation, circular buffer,
// zero history after clear, output held at 0 until the lobes are full,
// accumulator width.
module lobe_filter #(
  parameter int unsigned X_W   = 14,  // sample width
  parameter int unsigned N_MAX = 16,  // largest side-lobe width n
  parameter int unsigned M_MUL = 1,   // main-lobe width m = M_MUL*n
  parameter int          WS    = 1,   // side-lobe weight
  parameter int          WM    = 2,   // main-lobe weight
  parameter int unsigned ACC_W = 28,  // width of sums and output
  parameter int unsigned N_W   = $clog2(N_MAX+1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,   // restart with empty history
  input  logic [N_W-1:0]          n,
  input  logic [X_W-1:0]          x,
  output logic signed [ACC_W-1:0] y
);
  localparam int unsigned DEPTH = N_MAX*(2+M_MUL);
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned D_W   = $clog2(DEPTH+1);

  logic [X_W-1:0] mem [DEPTH];
  logic [AW-1:0]  wp;
  logic [D_W-1:0] fill;          // samples held, saturates at DEPTH
  logic signed [ACC_W-1:0] s_new, s_main, s_old;   // lobe sums

  logic [D_W-1:0] d1, d2, d3;    // tap distances n, n+m, 2n+m
  logic signed [ACC_W-1:0] x1, x2, x3, x0;
  logic signed [ACC_W-1:0] s_new_n, s_main_n, s_old_n;

  always_comb begin
    d1 = D_W'(n);
    d2 = D_W'(n) + D_W'(M_MUL*n);
    d3 = D_W'(2*n) + D_W'(M_MUL*n);
  end

  function automatic logic [AW-1:0] tap_addr(input logic [AW-1:0] p, input logic [D_W-1:0] d);
    int unsigned a;
    a = (int'(p) + DEPTH - int'(d)) % DEPTH;
    return AW'(a);
  endfunction

  // A tap farther back than the samples held reads as zero.
  always_comb begin
    x0 = ACC_W'(x);
    x1 = (fill >= d1) ? ACC_W'(mem[tap_addr(wp, d1)]) : '0;
    x2 = (fill >= d2) ? ACC_W'(mem[tap_addr(wp, d2)]) : '0;
    x3 = (fill >= d3) ? ACC_W'(mem[tap_addr(wp, d3)]) : '0;
    s_new_n  = s_new  + x0 - x1;
    s_main_n = s_main + x1 - x2;
    s_old_n  = s_old  + x2 - x3;
  end

  always_ff @(posedge clk) begin
    mem[wp] <= x;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; fill <= '0;
      s_new <= '0; s_main <= '0; s_old <= '0; y <= '0;
    end else if (clr) begin
      wp <= '0; fill <= '0;
      s_new <= '0; s_main <= '0; s_old <= '0; y <= '0;
    end else begin
      wp     <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      fill   <= (fill == D_W'(DEPTH)) ? fill : fill + 1'b1;
      s_new  <= s_new_n;
      s_main <= s_main_n;
      s_old  <= s_old_n;
      // Until all three lobes hold real samples the output is held at 0,
      // so that the start-up transient cannot look like a pulse.
      y      <= (fill + 1'b1 >= d3) ? ACC_W'(WS) * (s_new_n + s_old_n) - ACC_W'(WM) * s_main_n : '0;
    end
  end
endmodule

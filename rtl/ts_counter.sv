// Timestamp counter on the DAQ clock, readable in the 64 MHz trigger clock
// domain.
//
// The DAQ distributes a 100 MHz timestamp clock and a clear line to every
// trigger board, so trigger records from all boards can be matched with the
// digitised waveforms. A TS_W-bit binary counter (48 bits, the width of a
// DSP48A accumulator) runs on `ts_clk` and restarts at zero while `ts_clr` is
// high. It is converted to Gray code and registered in the ts_clk domain. The
// trigger clock domain samples it through two flip-flops and converts it back
// to binary. Because only one Gray bit changes per count, a sample taken
// mid-change is either the old or the new value. `ts` lags the DAQ clock by
// about three trigger clocks.
//
// From the paper: timestamping with the external 100 MHz clock, a clear input,
// and the DSP48A slices. Own choices: Gray-code crossing, counter width.
module ts_counter #(
  parameter int unsigned TS_W = 48
) (
  input  logic            ts_clk,   // 100 MHz DAQ clock
  input  logic            ts_clr,   // synchronous clear, ts_clk domain
  input  logic            clk,      // 64 MHz trigger clock
  input  logic            rst_n,
  output logic [TS_W-1:0] ts
);
  logic [TS_W-1:0] bin, gray;
  (* ASYNC_REG = "TRUE" *) logic [TS_W-1:0] g_s1, g_s2;

  always_ff @(posedge ts_clk or negedge rst_n) begin
    if (!rst_n) begin
      bin  <= '0;
      gray <= '0;
    end else if (ts_clr) begin
      bin  <= '0;
      gray <= '0;
    end else begin
      bin  <= bin + 1'b1;
      gray <= (bin + 1'b1) ^ ((bin + 1'b1) >> 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_s1 <= '0;
      g_s2 <= '0;
      ts   <= '0;
    end else begin
      g_s1 <= gray;
      g_s2 <= g_s1;
      for (int i = TS_W-1; i >= 0; i--)
        ts[i] <= (i == TS_W-1) ? g_s2[i] : (g_s2[i] ^ ts_gray2bin_above(g_s2, i));
    end
  end

  // XOR of all Gray bits above bit i (binary bit i = XOR of gray[TS_W-1:i]).
  function automatic logic ts_gray2bin_above(input logic [TS_W-1:0] g, input int i);
    logic r;
    r = 1'b0;
    for (int k = TS_W-1; k > i; k--) r ^= g[k];
    return r;
  endfunction
endmodule

// Trigger map: a one-bit look-up table with 2^AW cells.
//
// On the digitiser board, the 8-bit S1 and 8-bit S2 hit vectors, concatenated,
// form a 16-bit address. The cell at that address says whether a cycle with
// that pattern of hit channels is of interest (1) or not (0). The Trigger
// Builder uses the same structure for its 16-bit global hit vector. The user
// fills the map before the run, so every hit pattern can be accepted or
// rejected independently.
//
// Storage is 2^AW/16 words of 16 bits. The host writes one word per clock
// (`we`, `waddr`, `wdata`); cell a is bit a[3:0] of word a[AW-1:4]. A read is
// synchronous: the bit for `raddr` appears on `rbit` one clock later. Contents
// are not reset; the map must be written before use.
//
// From the paper: 2^16 single-bit cells addressed by the concatenated hit
// vectors. Own choices: 16-bit host write words and the one-clock read.
module trigger_map #(
  parameter int unsigned AW = 16
) (
  input  logic           clk,
  input  logic           we,
  input  logic [AW-5:0]  waddr,
  input  logic [15:0]    wdata,
  input  logic [AW-1:0]  raddr,
  output logic           rbit
);
  logic [15:0] mem [2**(AW-4)];
  logic [15:0] word_q;
  logic [3:0]  sel_q;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    word_q <= mem[raddr[AW-1:4]];
    sel_q  <= raddr[3:0];
  end

  assign rbit = word_q[sel_q];
endmodule

// Transmitter of the fast link between boards.
//
// The fast link is a one-way link over the four differential data pairs of an
// HDMI cable. It carries blocks of reduced quantities (hit vectors, maximum
// filter response, timestamps) from a digitiser board to the Trigger Builder,
// or from the Trigger Builder to the DAQ's logic module. Here each pair
// carries one bit per trigger clock, so the link moves one 4-bit nibble per
// clock. A frame is:
//   header nibble 4'hA, then ceil(PW/4) payload nibbles (least significant
//   first), then a check nibble: the XOR of all payload nibbles.
// Between frames the lanes are held at 4'h0. A frame of PW bits takes
// ceil(PW/4)+2 clocks.
//
// Interface: the payload is taken when `valid` and `ready` are both high;
// `ready` is low while a frame is being sent.
//
// From the paper: four data pairs, one direction, the kind of content. Own
// choices: the whole framing (the serialisation and line coding of the
// boards are not described) and a common 64 MHz clock on both ends.
module fast_link_tx #(
  parameter int unsigned PW = 96
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid,
  output logic          ready,
  input  logic [PW-1:0] data,
  output logic [3:0]    lanes
);
  localparam int unsigned NIB = (PW + 3) / 4;
  localparam int unsigned CW  = $clog2(NIB + 2);
  localparam logic [3:0] HDR = 4'hA;

  logic [4*NIB-1:0] sh;
  logic [CW-1:0]    cnt;
  logic             busy;
  logic [3:0]       chk;

  assign ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= '0; sh <= '0; chk <= '0; lanes <= 4'h0;
    end else if (!busy) begin
      lanes <= 4'h0;
      if (valid) begin
        busy  <= 1'b1;
        sh    <= (4*NIB)'(data);
        cnt   <= '0;
        chk   <= 4'h0;
        lanes <= HDR;
      end
    end else begin
      if (cnt < CW'(NIB)) begin
        lanes <= sh[3:0];
        chk   <= chk ^ sh[3:0];
        sh    <= sh >> 4;
        cnt   <= cnt + 1'b1;
      end else begin
        lanes <= chk;
        busy  <= 1'b0;
      end
    end
  end
endmodule

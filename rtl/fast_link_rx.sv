// Receiver of the fast link (see fast_link_tx for the frame format).
//
// While idle the receiver watches for the header nibble 4'hA. It then
// collects ceil(PW/4) payload nibbles, least significant first, and compares
// the check nibble with the XOR of the nibbles it received. At the check
// nibble it raises `valid` for one clock with the payload on `data`. `err` is
// high in that clock when the check failed. The payload is then still
// delivered, and the user decides whether to drop it. Latency: `valid` comes
// one clock after the check nibble is on the lanes.
//
// Own design, like the framing; the paper only gives the link's purpose and
// its four data pairs.
module fast_link_rx #(
  parameter int unsigned PW = 96
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [3:0]    lanes,
  output logic          valid,
  output logic          err,
  output logic [PW-1:0] data
);
  localparam int unsigned NIB = (PW + 3) / 4;
  localparam int unsigned CW  = $clog2(NIB + 2);
  localparam logic [3:0] HDR = 4'hA;

  logic [4*NIB-1:0] sh;
  logic [CW-1:0]    cnt;
  logic             busy;
  logic [3:0]       chk;

  assign data = sh[PW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= '0; sh <= '0; chk <= '0; valid <= 1'b0; err <= 1'b0;
    end else begin
      valid <= 1'b0;
      err   <= 1'b0;
      if (!busy) begin
        if (lanes == HDR) begin
          busy <= 1'b1;
          cnt  <= '0;
          chk  <= 4'h0;
        end
      end else if (cnt < CW'(NIB)) begin
        sh  <= {lanes, sh[4*NIB-1:4]};
        chk <= chk ^ lanes;
        cnt <= cnt + 1'b1;
      end else begin
        busy  <= 1'b0;
        valid <= 1'b1;
        err   <= (lanes != chk);
      end
    end
  end
endmodule

// Hit translator of the Trigger Builder: a programmable multiplicity
// discriminator.
//
// A map covering all 2^56 patterns of up to 56 received hit bits is out of
// reach, so the builder first reduces them to 16 bits. Each received hit bit,
// S1 or S2, is assigned by the user to one of 16 hit counters. Each counter
// stands for the detector area covered by a group of PMTs. The translator
// clears the counters, then scans the hit vectors. Whenever it finds a 1, it
// increments the counter the bit is assigned to. At the end of the scan, bit g
// of the 16-bit global hit vector is 1 when counter g has reached its
// threshold thr[g]. A threshold of 0 turns the bit off. The builder's trigger
// map then reads this vector.
//
// The scan takes bit i of the S1 vector and bit i of the S2 vector in the same
// clock. When both go to the same counter, it adds 2. The scan covers bits
// 0..scan_len-1 only, i.e. the boards that are connected. With two boards (16
// bits) `done` comes scan_len+1 clocks after `start`. Each assignment entry is
// {enable, group[3:0]}; entries 0..NBITS-1 belong to the S1 bits, NBITS..
// 2*NBITS-1 to the S2 bits.
//
// From the paper: assignment of each hit bit to a counter, the scan that
// increments the counters, threshold comparison into a 16-bit vector. Own
// choices: scanning S1 and S2 in parallel, the scan length, threshold 0 =
// off, the entry format.
module hit_translator
  import lux_trig_pkg::*;
#(
  parameter int unsigned NBITS = TB_BITS,
  parameter int unsigned NG    = NGROUP,
  parameter int unsigned CW    = GCNT_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [$clog2(NBITS+1)-1:0]   scan_len,
  input  logic [NBITS-1:0]             s1_hv,
  input  logic [NBITS-1:0]             s2_hv,
  input  logic [2*NBITS-1:0][4:0]      assign_cfg,
  input  logic [NG-1:0][CW-1:0]        thr,
  output logic                         done,
  output logic [NG-1:0]                ghv,
  output logic [NG-1:0][CW-1:0]        counts
);
  localparam int unsigned IW = $clog2(NBITS+1);

  logic [NBITS-1:0] v1, v2;
  logic [IW-1:0]    idx, len;
  logic             busy;
  logic [4:0]       a1, a2;
  logic             h1, h2;

  always_comb begin
    a1 = assign_cfg[idx];
    a2 = assign_cfg[NBITS + int'(idx)];
    h1 = v1[idx] && a1[4];
    h2 = v2[idx] && a2[4];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; idx <= '0; len <= '0;
      v1 <= '0; v2 <= '0; counts <= '0; ghv <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          idx    <= '0;
          len    <= (scan_len > IW'(NBITS)) ? IW'(NBITS) : scan_len;
          v1     <= s1_hv;
          v2     <= s2_hv;
          counts <= '0;
        end
      end else if (idx >= len) begin
        busy <= 1'b0;
        done <= 1'b1;
        for (int g = 0; g < NG; g++)
          ghv[g] <= (thr[g] != '0) && (counts[g] >= thr[g]);
      end else begin
        for (int g = 0; g < NG; g++)
          counts[g] <= counts[g] + CW'(h1 && a1[3:0] == 4'(g)) + CW'(h2 && a2[3:0] == 4'(g));
        idx <= idx + 1'b1;
      end
    end
  end
endmodule

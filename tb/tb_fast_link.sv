// Testbench of fast_link_tx and fast_link_rx back to back, with the record
// width of the digitiser board. Random records are sent with random gaps and
// back to back. Each must arrive intact, in order, flagged good, and the
// frame must take ceil(PW/4)+2 clocks. Then one payload nibble is corrupted
// on the lanes, and the receiver must flag the frame as bad.
module tb_fast_link;
  import lux_trig_pkg::*;
  localparam int PW = REC_W;
  localparam int NIB = (PW + 3) / 4;
  logic clk = 0, rst_n = 0, valid = 0, ready, rvalid, rerr, corrupt = 0;
  logic [PW-1:0] data, rdata;
  logic [3:0] lanes, lanes_rx;
  logic [PW-1:0] q[$];
  int checks = 0, failures = 0, got = 0, errs = 0;
  int t_send, t_recv;
  always #5 clk = ~clk;
  fast_link_tx #(.PW(PW)) tx (.clk, .rst_n, .valid, .ready, .data, .lanes);
  assign lanes_rx = corrupt ? lanes ^ 4'h4 : lanes;
  fast_link_rx #(.PW(PW)) rx (.clk, .rst_n, .lanes(lanes_rx), .valid(rvalid), .err(rerr), .data(rdata));
  always @(posedge clk) if (rst_n && rvalid) begin
    t_recv = $time;
    if (rerr) errs++;
    else begin
      checks++;
      got++;
      if (q.size() == 0 || rdata != q[0]) begin failures++; $display("bad record"); end
      if (q.size() != 0) void'(q.pop_front());
    end
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      for (int w = 0; w < PW; w += 32) data[w +: 32] = $urandom;
      if (i == 0) data = '0;
      if (i == 1) data = '1;
      while (!ready) @(negedge clk);
      valid = 1;
      @(posedge clk);          // taken on this edge
      q.push_back(data);
      t_send = $time;
      @(negedge clk);
      valid = 0;
      if (i < 100) repeat ($urandom_range(0, 5)) @(negedge clk);
      if (i == 10) begin
        // timing of one frame: from acceptance to valid at the receiver
        // (t_recv is the edge after the one that raised rvalid)
        while (!(t_recv > t_send + 50)) @(negedge clk);
        checks++;
        if ((t_recv - t_send) / 10 - 1 != NIB + 2) begin
          failures++; $display("frame took %0d clocks, expected %0d", (t_recv - t_send)/10 - 1, NIB + 2);
        end
      end
    end
    repeat (NIB + 5) @(negedge clk);
    checks++;
    if (got != 200) begin failures++; $display("got %0d of 200", got); end
    // corrupt one payload nibble
    data = 'h12345; valid = 1;
    @(negedge clk); valid = 0;
    repeat (3) @(negedge clk);
    corrupt = 1; @(negedge clk); corrupt = 0;
    repeat (NIB + 5) @(negedge clk);
    checks++;
    if (errs != 1) begin failures++; $display("corruption not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of threshold_disc: random filter values and thresholds, including
// the edge cases equal-to-threshold and 65535. Each registered output is
// compared with a strict "greater than" one clock later.
module tb_threshold_disc;
  logic clk = 0, rst_n = 0;
  logic [15:0] y, lo, hi;
  logic lo_hit, hi_hit;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  threshold_disc dut (.clk, .rst_n, .y, .lo, .hi, .lo_hit, .hi_hit);
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [15:0] ey, elo, ehi;
    y = 0; lo = 0; hi = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      case (i % 4)
        0: begin y = 16'($urandom); lo = 16'($urandom); hi = 16'($urandom); end
        1: begin y = 16'($urandom); lo = y; hi = y - 1; end
        2: begin y = 16'hFFFF; lo = 16'hFFFF; hi = 16'hFFFE; end
        default: begin y = 16'($urandom_range(0, 300)); lo = 150; hi = 250; end
      endcase
      ey = y; elo = lo; ehi = hi;
      @(negedge clk);
      checks += 2;
      if (lo_hit != (ey > elo)) failures++;
      if (hi_hit != (ey > ehi)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of trigger_map. The whole 2^16 map is written with a pattern
// computed from the address, and random cells are read back one clock after
// the address is applied. The cells of Fig. 19 are also checked: the
// all-zero address and the all-ones address hold 0, and the address with only
// S1 channel 1 hit holds 1.
module tb_trigger_map;
  logic clk = 0, we = 0;
  logic [11:0] waddr;
  logic [15:0] wdata, raddr;
  logic rbit;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  trigger_map #(.AW(16)) dut (.clk, .we, .waddr, .wdata, .raddr, .rbit);
  function automatic bit pat(int a);
    // a cell is set when the number of hit bits is odd, except the corner cases
    if (a == 16'h0100) return 1;
    if (a == 16'h0000 || a == 16'hFFFF) return 0;
    return ($countones(a) % 2) == 1 || (a % 7) == 3;
  endfunction
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    raddr = 0;
    @(negedge clk);
    for (int w = 0; w < 4096; w++) begin
      we = 1; waddr = 12'(w);
      for (int b = 0; b < 16; b++) wdata[b] = pat(w*16 + b);
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 3000; i++) begin
      int a;
      case (i)
        0: a = 16'h0000;
        1: a = 16'h0100;
        2: a = 16'hFFFF;
        default: a = $urandom_range(0, 65535);
      endcase
      raddr = 16'(a);
      @(negedge clk);
      checks++;
      if (rbit != pat(a)) begin
        failures++;
        if (failures < 5) $display("addr %h: %0d", a, rbit);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of slow_link_hub: random flags, states and enable masks. The
// board-wide flags must be the OR over enabled boards only, the decision must
// pass through, and desync must be set exactly when two enabled boards report
// different states.
module tb_slow_link_hub;
  import lux_trig_pkg::*;
  logic [6:0] en, b_s1_raw, b_s1, b_s2;
  fsm_state_e [6:0] b_state;
  logic dec_done, dec_trig, g_s1_raw, g_s1, g_s2, tb_done, tb_trig, desync;
  int checks = 0, failures = 0;
  slow_link_hub #(.NB(7)) dut (.*);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 3000; i++) begin
      bit e_ds;
      fsm_state_e first;
      bit have;
      en = 7'($urandom); b_s1_raw = 7'($urandom); b_s1 = 7'($urandom); b_s2 = 7'($urandom);
      dec_done = 1'($urandom); dec_trig = 1'($urandom);
      first = fsm_state_e'($urandom_range(0, 7));
      for (int b = 0; b < 7; b++)
        b_state[b] = ($urandom_range(0, 3) == 0) ? fsm_state_e'($urandom_range(0, 7)) : first;
      #1;
      e_ds = 0; have = 0;
      for (int b = 0; b < 7; b++) if (en[b]) begin
        if (have && b_state[b] != first) e_ds = 1;
        if (!have) begin first = b_state[b]; have = 1; end
      end
      checks += 4;
      if (g_s1_raw != ((b_s1_raw & en) != 0)) failures++;
      if (g_s1 != ((b_s1 & en) != 0) || g_s2 != ((b_s2 & en) != 0)) failures++;
      if (tb_done != dec_done || tb_trig != dec_trig) failures++;
      if (desync != e_ds) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

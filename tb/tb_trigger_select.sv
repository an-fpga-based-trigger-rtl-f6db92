// Testbench for trigger_select with the reset settings. Each event type is
// produced on its own by driving the shaped detector levels, and the first
// cycle and length of the trigger, of ALL OR and of the synchronised type
// are compared with numbers worked out by hand from the settings:
//   type    sync delay/width   trigger rise (input edge in cycle 0)
//   fission      10/10         11   (PPAC M2 sync 200 ns + 20 ns)
//   SSD M2       10/16         11
//   PPAC&SSD     16/16         17   (only when the other types are masked)
//   PPAC&gamma    0/16          2
//   SSD&gamma     0/16          2
//   ALL OR       10/20         all_or rises at 10; in the trigger only when enabled
// The trigger is 20 cycles (400 ns) long.
`timescale 1ns/1ps
module tb_trigger_select;
  import trigger_pkg::*;

  logic clk = 0, rst_n = 1;
  logic gamma_m1 = 0, ssd_m1 = 0, ssd_m2 = 0, fission = 0, ppac_m2 = 0, ppac_m1 = 0;
  gdg_cfg_t cfg_sync [N_TRIG];
  gdg_cfg_t cfg_trig;
  logic [N_TRIG-1:0] trig_mask, sync_out;
  logic trigger, all_or;
  int checks = 0, failures = 0;

  trigger_select dut (.clk, .rst_n, .gamma_m1, .ssd_m1, .ssd_m2, .fission, .ppac_m2, .ppac_m1,
                      .cfg_sync, .cfg_trig, .trig_mask, .sync_out, .trigger, .all_or);

  always #10 clk = ~clk;
  initial #1 rst_n = 0;   // a real reset edge, before the first clock edge

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // inputs: bit0 gamma, 1 ssd_m1, 2 ssd_m2, 3 ppac_m2, 4 ppac_m1; held for 'len' cycles from cycle 0
  task automatic event_run(string name, logic [4:0] ins, int len,
                           int exp_trig, int exp_all, int sync_idx, int exp_sync);
    int t_first, t_n, a_first, a_n, s_first;
    t_first = -1; t_n = 0; a_first = -1; a_n = 0; s_first = -1;
    for (int k = 0; k < 120; k++) begin
      @(posedge clk); #1;
      {ppac_m1, ppac_m2, ssd_m2, ssd_m1, gamma_m1} = (k < len) ? ins : 5'b0;
      fission = (k < len) && ins[3];   // unshaped and shaped PPAC M2 together
      #8;
      if (trigger) begin t_n++; if (t_first < 0) t_first = k; end
      if (all_or)  begin a_n++; if (a_first < 0) a_first = k; end
      if (sync_idx >= 0 && sync_out[sync_idx] && s_first < 0) s_first = k;
    end
    checks += 3;
    if (t_first != exp_trig || (exp_trig >= 0 && t_n != 20) || (exp_trig < 0 && t_n != 0)) begin
      failures++;
      $display("%s: trigger at %0d len %0d, expected at %0d len 20", name, t_first, t_n, exp_trig);
    end
    if (a_first != exp_all || (exp_all >= 0 && a_n != 20)) begin
      failures++;
      $display("%s: all_or at %0d len %0d, expected at %0d", name, a_first, a_n, exp_all);
    end
    if (sync_idx >= 0 && s_first != exp_sync) begin
      failures++;
      $display("%s: sync[%0d] at %0d, expected %0d", name, sync_idx, s_first, exp_sync);
    end
    repeat (10) @(posedge clk);
  endtask

  initial begin
    for (int i = 0; i < N_TRIG; i++) cfg_sync[i] = gdg_default(G_SYNC0 + i);
    cfg_trig  = gdg_default(G_TRIGGER);
    trig_mask = 6'b01_1111;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    //         name                ins (p1 p2 s2 s1 g)  len  trig  all  sync exp
    event_run("fission",           5'b01000,  32,  11,  -1, 0, 10);
    event_run("two-body LCP",      5'b00100,  16,  11,  -1, 1, 10);
    event_run("LCP alone",         5'b00010,   4,  -1,  10, 5, 10);
    event_run("gamma alone",       5'b00001,   4,  -1,  10, 5, 10);
    event_run("PPAC M1 alone",     5'b10000,  20,  -1,  10, 5, 10);
    event_run("LCP & gamma",       5'b00011,   4,   2,  10, 4, 1);
    event_run("fission & gamma",   5'b01001,   4,   2,  10, 3, 1);
    event_run("fission & LCP",     5'b01010,   4,  11,  10, 2, 16);
    trig_mask = 6'b00_0100;
    event_run("fission & LCP only",5'b01010,   4,  17,  10, 2, 16);
    event_run("fission masked",    5'b01000,  32,  -1,  -1, 0, 10);
    trig_mask = 6'b01_1111 & ~6'b01_0000;
    event_run("LCP&gamma masked",  5'b00011,   4,  -1,  10, 4, 1);
    trig_mask = 6'b10_0000;   // inclusive trigger enabled
    event_run("inclusive trigger", 5'b00010,   4,  11,  10, 5, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

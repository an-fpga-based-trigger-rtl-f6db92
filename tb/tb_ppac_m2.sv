// Testbench for ppac_m2 with the reset settings (PPAC T 20 ns/400 ns,
// PPAC M2 0 ns/640 ns = 32 cycles). Fission (ppac_m2) must appear for
// PPAC1 with PPAC2 and PPAC1 with PPAC3 when their shaped 20-cycle gates
// overlap, two cycles after the later edge, for 32 cycles; never for PPAC2
// with PPAC3 or a single PPAC; the unshaped fission output one cycle
// earlier. ppac_m1 must follow any single PPAC.
`timescale 1ns/1ps
module tb_ppac_m2;
  import trigger_pkg::*;

  logic clk = 0, rst_n = 1;
  logic [2:0] ppac_t = '0;
  gdg_cfg_t cfg_t [3];
  gdg_cfg_t cfg_m2;
  logic [2:0] ppac_t_gdg;
  logic fission, ppac_m2, ppac_m1;
  int checks = 0, failures = 0;

  ppac_m2 dut (.clk, .rst_n, .ppac_t, .cfg_t, .cfg_m2, .ppac_t_gdg, .fission, .m2_out(ppac_m2), .ppac_m1);

  always #10 clk = ~clk;
  initial #1 rst_n = 0;   // a real reset edge, before the first clock edge

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fire PPAC 'a' in cycle 0 and PPAC 'b' in cycle 'dt' (b < 0: none);
  // expect M2 rise at exp_rise (or none if < 0) for 32 cycles, M1 from cycle 1
  task automatic pair(int a, int b, int dt, int exp_rise);
    int first, n, m1_first, f_first;
    first = -1; n = 0; m1_first = -1; f_first = -1;
    for (int k = 0; k < 80; k++) begin
      @(posedge clk); #1;
      ppac_t = '0;
      if (k == 0) ppac_t[a] = 1'b1;
      if (b >= 0 && k == dt) ppac_t[b] = 1'b1;
      #8;
      if (ppac_m2) begin n++; if (first < 0) first = k; end
      if (ppac_m1 && m1_first < 0) m1_first = k;
      if (fission && f_first < 0) f_first = k;
    end
    checks += 3;
    if (f_first != ((exp_rise < 0) ? -1 : exp_rise - 1)) begin
      failures++; $display("fission rise %0d, expected %0d", f_first, exp_rise - 1);
    end
    if (exp_rise < 0) begin
      if (n != 0) begin failures++; $display("PPAC%0d/%0d dt=%0d: unexpected fission", a+1, b+1, dt); end
    end else if (first != exp_rise || n != 32) begin
      failures++;
      $display("PPAC%0d/%0d dt=%0d: rise %0d (exp %0d) len %0d (exp 32)", a+1, b+1, dt, first, exp_rise, n);
    end
    if (m1_first != 1) begin failures++; $display("PPAC M1 rise %0d (exp 1)", m1_first); end
    repeat (10) @(posedge clk);
  endtask

  initial begin
    for (int i = 0; i < 3; i++) cfg_t[i] = '{width: 8'd20, delay: 8'd1};
    cfg_m2 = '{width: 8'd32, delay: 8'd0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    pair(0, 1, 0, 2);      // PPAC1 x 2 simultaneous
    pair(0, 2, 0, 2);      // PPAC1 x 3
    pair(1, 2, 0, -1);     // PPAC2 x 3 is not a fission
    pair(0, -1, 0, -1);    // PPAC1 alone
    pair(1, -1, 0, -1);    // PPAC2 alone
    pair(2, -1, 0, -1);
    pair(0, 1, 15, 17);    // PPAC2 15 cycles later, gates overlap
    pair(1, 0, 19, 21);    // PPAC1 19 cycles after PPAC2: last overlap cycle
    pair(0, 2, 20, -1);    // PPAC3 20 cycles later: gates do not overlap
    pair(2, 0, 7, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench for gamma_m1 with the reset settings (per crystal 0 ns/80 ns,
// gamma M1 20 ns/80 ns). A one-cycle pulse on any crystal first seen in
// cycle c must give gamma_m1 high in cycles c+2..c+5 and nowhere else;
// several crystals firing together give one pulse; a crystal whose GDG
// width is 0 is switched off.
`timescale 1ns/1ps
module tb_gamma_m1;
  import trigger_pkg::*;

  logic clk = 0, rst_n = 1;
  logic [15:0] gamma_t = '0;
  gdg_cfg_t cfg_ch [16];
  gdg_cfg_t cfg_m1;
  logic gamma_m1;
  int checks = 0, failures = 0;

  gamma_m1 #(.N_CH(16)) dut (.clk, .rst_n, .gamma_t, .cfg_ch, .cfg_m1, .m1_out(gamma_m1));

  always #10 clk = ~clk;
  initial #1 rst_n = 0;   // a real reset edge, before the first clock edge

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Drive 'pattern' for one cycle (cycle 0), then observe 12 cycles; the
  // output must be high exactly in cycles [exp_rise, exp_rise+3].
  task automatic shot(logic [15:0] pattern, int exp_rise);
    int hi_first, n_hi;
    hi_first = -1; n_hi = 0;
    @(posedge clk); #1 gamma_t = pattern;
    @(posedge clk); #1 gamma_t = '0;
    for (int k = 1; k <= 12; k++) begin
      #8;
      if (gamma_m1) begin
        n_hi++;
        if (hi_first < 0) hi_first = k;
      end
      @(posedge clk); #1;
    end
    checks++;
    if (exp_rise < 0) begin
      if (n_hi != 0) begin failures++; $display("pattern %h: unexpected output", pattern); end
    end else if (hi_first != exp_rise || n_hi != 4) begin
      failures++;
      $display("pattern %h: rise %0d (exp %0d), %0d cycles (exp 4)", pattern, hi_first, exp_rise, n_hi);
    end
    repeat (6) @(posedge clk);
  endtask

  initial begin
    for (int i = 0; i < 16; i++) cfg_ch[i] = '{width: 8'd4, delay: 8'd0};   // 80 ns, 0 ns
    cfg_m1 = '{width: 8'd4, delay: 8'd1};                                   // 80 ns, 20 ns
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    shot('0, -1);
    for (int i = 0; i < 16; i++) shot(16'(1) << i, 2);
    shot(16'h8421, 2);
    shot(16'hFFFF, 2);
    repeat (5) shot(16'($urandom_range(1, 16'hFFFF)), 2);
    cfg_ch[7] = '{width: 8'd0, delay: 8'd0};
    shot(16'h0080, -1);
    shot(16'h0081, 2);
    // longer crystal delay shifts the output
    cfg_ch[3] = '{width: 8'd4, delay: 8'd5};
    shot(16'h0008, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

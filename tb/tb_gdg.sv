// Testbench for gdg: drives random pulse trains under several delay/width
// settings (the published ones among them) and compares the output, cycle
// by cycle, with a reference model: an input edge first seen in cycle c
// starts a pulse at c+max(delay,1) unless the previous pulse has not yet
// ended one cycle earlier; each pulse lasts width cycles. Also checks the
// exact latency of a single edge for the 20 ns / 400 ns PPAC setting.
`timescale 1ns/1ps
module tb_gdg;
  import trigger_pkg::*;

  logic clk = 0, rst_n = 1, in_sig = 0, out_sig;
  gdg_cfg_t cfg;
  int checks = 0, failures = 0;
  int cyc = 0;

  gdg dut (.clk, .rst_n, .in_sig, .cfg, .out_sig);

  always #10 clk = ~clk;
  initial #1 rst_n = 0;   // a real reset edge, before the first clock edge   // 50 MHz

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model state
  bit   prev_in;
  int   next_start, last_start, cur_w, active_until;
  int   pend_q[$];   // pending start cycles

  task automatic reset_model();
    prev_in = 0; last_start = -1000; active_until = -1000; pend_q.delete();
  endtask

  // one cycle: drive value v for cycle 'cyc', then check model vs DUT
  task automatic step(bit v);
    int d;
    @(posedge clk);
    cyc++;
    #1 in_sig = v;
    d = (cfg.delay <= 1) ? 1 : int'(cfg.delay);
    if (v && !prev_in) pend_q.push_back(cyc + d);
    prev_in = v;
    #8;  // mid-cycle
    // a start scheduled now is accepted if the previous pulse ended at least one cycle earlier
    if (pend_q.size() > 0 && pend_q[0] == cyc) begin
      void'(pend_q.pop_front());
      if (cyc > active_until + 1 && cfg.width != 0) begin
        last_start = cyc;
        active_until = cyc + int'(cfg.width) - 1;
      end
    end
    checks++;
    if (out_sig !== (cyc <= active_until)) begin
      failures++;
      if (failures < 10) $display("mismatch cycle %0d: out=%0b expected=%0b (d=%0d w=%0d)",
                                  cyc, out_sig, cyc <= active_until, cfg.delay, cfg.width);
    end
  endtask

  task automatic run_cfg(int unsigned d, int unsigned w, int unsigned n_pulses, int unsigned gap);
    cfg = '{width: 8'(w), delay: 8'(d)};
    // let any old pulse drain and clear the model
    in_sig = 0;
    repeat (600) @(posedge clk);
    cyc = 0;
    reset_model();
    for (int p = 0; p < n_pulses; p++) begin
      int hi = 1 + $urandom_range(0, 6);
      int lo = 1 + $urandom_range(0, gap);
      repeat (hi) step(1);
      repeat (lo) step(0);
    end
    repeat (300) step(0);
  endtask

  initial begin
    cfg = gdg_default(G_PPAC_T0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // exact latency: 20 ns / 400 ns -> rises 1 cycle after the edge, 20 cycles
    begin
      int t_edge, t_rise, t_fall;
      t_rise = 0; t_fall = 0;
      @(posedge clk); #1 in_sig = 1; t_edge = 0;
      for (int k = 1; k < 40; k++) begin
        @(posedge clk); #1 in_sig = 0;
        #8;
        if (out_sig && t_rise == 0) t_rise = k;
        if (!out_sig && t_rise != 0 && t_fall == 0) t_fall = k;
      end
      checks++;
      if (t_rise != 1 || t_fall - t_rise != 20) begin
        failures++;
        $display("latency check: rise %0d (exp 1) width %0d (exp 20)", t_rise, t_fall - t_rise);
      end
    end
    // published settings and others
    run_cfg(1, 20, 60, 30);     // PPAC T: 20 ns / 400 ns
    run_cfg(0, 32, 60, 40);     // PPAC M2: 0 / 640 ns
    run_cfg(10, 10, 80, 20);    // sync PPAC M2: 200 / 200 ns
    run_cfg(16, 16, 80, 30);    // 320 / 320 ns
    run_cfg(1, 4, 100, 8);      // gamma / SSD M1: 20 / 80 ns
    run_cfg(3, 2, 200, 4);      // short, multiple edges inside the delay
    run_cfg(200, 5, 60, 10);    // long delay line
    run_cfg(255, 3, 30, 10);    // longest delay
    run_cfg(5, 0, 30, 5);       // switched off
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

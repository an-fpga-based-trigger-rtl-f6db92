// Beam-run testbench: the trigger system at its default parameters and
// reset settings under an event stream like the one of the 25 MeV/u
// 86Kr+124Sn run: one-body rate 20 k/s and then 40 k/s, about one event in
// forty of a class that should trigger (global trigger rate 0.5-1 k/s),
// and a DAQ whose dead time varies between 80 and 200 us per event.
//
// Events are separated by at least 3 us (plus an exponential gap), so each
// one can be judged on its own. For every event the testbench predicts,
// from its class alone, whether the trigger must fire, that ALL OR must
// fire, and - from its own record of when the DAQ last accepted an event
// and for how long it is dead - whether the final trigger must reach the
// DAQ. Events within 1 us of the end of a dead time are not judged for the
// final trigger. At the end the trigger and ALL OR scalers are read over
// SPI and compared, and the rates and live time are printed.
`timescale 1ns/1ps
module tb_beam_run;
  import trigger_pkg::*;

  logic clk = 0, rst_n = 1;
  logic [15:0] gamma_t = '0, gamma_tdc;
  logic ssd_m1 = 0, ssd_m2 = 0;
  logic [2:0] ppac_t = '0;
  logic trigger, all_or, mon_out, fts, its_latched;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic daq_busy = 0, daq_reset = 0;
  int checks = 0, failures = 0;

  cshine_trigger_top dut (
    .clk, .rst_n, .gamma_t, .ssd_m1, .ssd_m2, .ppac_t, .gamma_tdc,
    .trigger, .all_or, .mon_out,
    .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
    .daq_reset, .daq_busy, .fts, .its_latched);

  always #10 clk = ~clk;
  initial #1 rst_n = 0;

  initial begin : watchdog
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- DAQ with random dead time ----------------
  longint cyc = 0;
  longint busy_end_cyc = -1;     // cycle at which the DAQ is free again
  longint dead_total = 0;
  int n_acc = 0, n_fts_in_busy = 0;
  logic fts_q = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    fts_q <= fts;
    if (fts && !fts_q && daq_busy) n_fts_in_busy++;
  end
  initial begin
    forever begin
      int dead;
      @(posedge clk iff (fts && !fts_q && !daq_busy));
      n_acc++;
      dead = $urandom_range(4000, 10000);          // 80-200 us
      dead_total += dead + 12;
      busy_end_cyc = cyc + 12 + dead;
      repeat (10) @(posedge clk);
      #2 daq_busy = 1;
      repeat (dead) @(posedge clk);
      #2 daq_reset = 1;
      repeat (2) @(posedge clk);
      #2 daq_reset = 0; daq_busy = 0;
    end
  end

  // ---------------- counters ----------------
  int n_trig = 0, n_all = 0, n_fts = 0;
  logic trig_q = 0, all_q = 0;
  always @(posedge clk) begin
    trig_q <= trigger; all_q <= all_or;
    if (rst_n && trigger && !trig_q) n_trig++;
    if (rst_n && all_or && !all_q) n_all++;
    if (rst_n && fts && !fts_q) n_fts++;
  end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("[%0t] FAIL %s", $time, what);
    end
  endtask

  // ---------------- SPI read ----------------
  task automatic spi_rd(logic [6:0] a, output logic [15:0] rd);
    logic [23:0] word;
    word = {1'b0, a, 16'h0};
    rd = '0;
    cs_n = 0;
    repeat (4) @(posedge clk);
    for (int b = 23; b >= 0; b--) begin
      mosi = word[b];
      repeat (4) @(posedge clk);
      sclk = 1;
      rd = {rd[14:0], miso};
      repeat (4) @(posedge clk);
      sclk = 0;
    end
    repeat (4) @(posedge clk);
    cs_n = 1;
    repeat (8) @(posedge clk);
  endtask
  task automatic spi_rd32(int idx, output logic [31:0] v);
    logic [15:0] lo, hi;
    spi_rd(7'(8'h40 + 2 * idx), lo);
    spi_rd(7'(8'h40 + 2 * idx + 1), hi);
    v = {hi, lo};
  endtask

  // ---------------- event classes ----------------
  typedef enum int {
    C_GAMMA, C_LCP, C_PPAC, C_PPAC23,              // one-body only
    C_FISSION, C_FISSION_LCP, C_FISSION_GAMMA, C_TWO_LCP, C_LCP_GAMMA
  } cls_e;

  function automatic cls_e pick_class();
    int r = $urandom_range(0, 999);
    if (r < 5)   return C_FISSION;
    if (r < 10)  return C_FISSION_LCP;
    if (r < 13)  return C_FISSION_GAMMA;
    if (r < 20)  return C_TWO_LCP;
    if (r < 25)  return C_LCP_GAMMA;
    if (r < 55)  return C_PPAC23;
    if (r < 355) return C_GAMMA;
    if (r < 655) return C_LCP;
    return C_PPAC;
  endfunction

  function automatic bit triggers(cls_e c);
    return c inside {C_FISSION, C_FISSION_LCP, C_FISSION_GAMMA, C_TWO_LCP, C_LCP_GAMMA};
  endfunction

  // PPAC at t0, gamma +20 ns, SSD M1 +100 ns, SSD M2 +110 ns, widths 120-240 ns
  task automatic drive(cls_e c);
    bit p1, p2, p3, s1, s2, g;
    {p1, p2, p3, s1, s2, g} = '0;
    case (c)
      C_GAMMA:         g = 1;
      C_LCP:           s1 = 1;
      C_PPAC:          case ($urandom_range(0, 2)) 0: p1 = 1; 1: p2 = 1; default: p3 = 1; endcase
      C_PPAC23:        begin p2 = 1; p3 = 1; end
      C_FISSION:       begin p1 = 1; if ($urandom_range(0, 1)) p2 = 1; else p3 = 1; end
      C_FISSION_LCP:   begin p1 = 1; p2 = 1; s1 = 1; end
      C_FISSION_GAMMA: begin p1 = 1; p3 = 1; g = 1; end
      C_TWO_LCP:       begin s1 = 1; s2 = 1; end
      default:         begin s1 = 1; g = 1; end   // LCP & gamma
    endcase
    #($urandom_range(1, 19));    // arbitrary phase to the clock
    fork
      begin if (p1 | p2 | p3) begin ppac_t = {p3, p2, p1}; #160; ppac_t = '0; end end
      begin if (g) begin #20; gamma_t[$urandom_range(0, 14)] = 1; #120; gamma_t = '0; end end
      begin if (s1) begin #100; ssd_m1 = 1; #140; ssd_m1 = 0; end end
      begin if (s2) begin #110; ssd_m2 = 1; #200; ssd_m2 = 0; end end
    join
  endtask

  // one run of n events at a one-body rate of rate_hz
  task automatic run(int n_events, int rate_hz);
    int mean_gap = 50_000_000 / rate_hz;      // cycles
    longint t_start = cyc;
    int trig0 = n_trig, acc0 = n_acc, all0 = n_all, n_trig_cls = 0;
    longint dead0 = dead_total;
    for (int i = 0; i < n_events; i++) begin
      cls_e c;
      int t0, a0, f0;
      bit judge_fts, exp_fts;
      longint start_cyc;
      int gap;
      c = pick_class();
      t0 = n_trig; a0 = n_all; f0 = n_fts;
      start_cyc = cyc;
      // DAQ state when the trigger would arrive (~25 cycles later)
      judge_fts = !(start_cyc + 25 > busy_end_cyc - 50 && start_cyc + 25 < busy_end_cyc + 50);
      exp_fts   = triggers(c) && (start_cyc + 25 >= busy_end_cyc);
      drive(c);
      repeat (120) @(posedge clk);
      if (triggers(c)) n_trig_cls++;
      check($sformatf("event %0d class %s: trigger %0d", i, c.name(), n_trig - t0),
            (n_trig - t0) == int'(triggers(c)));
      check($sformatf("event %0d class %s: ALL OR %0d", i, c.name(), n_all - a0), (n_all - a0) == 1);
      if (judge_fts)
        check($sformatf("event %0d class %s: final trigger %0d expected %0d", i, c.name(), n_fts - f0, exp_fts),
              (n_fts - f0) == int'(exp_fts));
      // exponential gap, at least 3 us
      gap = 150 + int'(-$ln(1.0 - real'($urandom_range(0, 999_999)) / 1.0e6) * real'(mean_gap - 150));
      repeat (gap) @(posedge clk);
    end
    begin
      real secs = real'(cyc - t_start) * 20.0e-9;
      $display("run at %0d /s one-body: %0d events in %0.1f ms; one-body %0.1f k/s, trigger %0.2f k/s, accepted %0.2f k/s, dead %0.1f %%",
               rate_hz, n_events, secs * 1e3, real'(n_all - all0) / secs / 1e3,
               real'(n_trig - trig0) / secs / 1e3, real'(n_acc - acc0) / secs / 1e3,
               100.0 * real'(dead_total - dead0) / real'(cyc - t_start));
      check("trigger count equals trigger-class events", (n_trig - trig0) == n_trig_cls);
    end
  endtask

  initial begin
    logic [31:0] sc;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    run(1000, 20_000);
    run(2000, 40_000);
    wait (!daq_busy);
    repeat (20) @(posedge clk);
    spi_rd32(M_TRIGGER, sc);
    check($sformatf("trigger scaler %0d vs %0d", sc, n_trig), sc == 32'(n_trig));
    spi_rd32(M_SYNC0 + T_ALL_OR, sc);
    check($sformatf("ALL OR scaler %0d vs %0d", sc, n_all), sc == 32'(n_all));
    check("no final trigger while busy", n_fts_in_busy == 0);
    check("every final trigger accepted by the DAQ", n_fts == n_acc);
    check("some events accepted", n_acc > 10);
    check("some triggers lost in dead time", n_trig > n_acc);
    $display("triggers %0d, accepted %0d, lost in dead time %0d", n_trig, n_acc, n_trig - n_acc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

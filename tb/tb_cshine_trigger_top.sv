// End-to-end testbench of the CSHINE trigger system at its default
// parameters and reset settings, with a DAQ of 200 us dead time.
//
// Detector signals are driven 5 ns after a clock edge, as asynchronous
// 120-200 ns logic pulses. For each event the testbench knows from the
// trigger scheme which types must fire and when the trigger must rise,
// counted from the PPAC edge time t0 (gamma comes 20 ns, SSD M1 100 ns and
// SSD M2 110 ns after it; the numbers are whole cycles after the clock edge
// that precedes t0 by 5 ns):
//   fission (PPAC1 with PPAC2 or PPAC3)   14 cycles - 5 ns = 275 ns
//   fission & gamma                        7 cycles - 5 ns = 135 ns
//   two-body LCP (SSD M2)                 19 cycles - 5 ns = 375 ns
//   LCP & gamma                           10 cycles - 5 ns = 195 ns
//   fission & LCP (others masked)         25 cycles - 5 ns = 495 ns
// and that the fission trigger comes 200 ns after the shaped PPAC M2.
// and that the trigger is 400 ns long and ALL OR 400 ns long. It checks
// the final trigger against the DAQ busy state, switches the trigger mask
// and a synchronisation delay over SPI, and at the end reads every scaler
// over SPI and compares it with its own counts. Every mechanism (each
// trigger type, ALL OR, the busy veto, mask switch, delay change, scaler
// clear) is counted and must have happened at least once. Last, as in a
// pulser test, PPAC1 T is put on the monitor output and its GDG delay is
// set to 20 and then 40 ns; the monitor edge must move by the same step.
`timescale 1ns/1ps
module tb_cshine_trigger_top;
  import trigger_pkg::*;

  logic clk = 0, rst_n = 1;
  logic [15:0] gamma_t = '0, gamma_tdc;
  logic ssd_m1 = 0, ssd_m2 = 0;
  logic [2:0] ppac_t = '0;
  logic trigger, all_or, mon_out, fts, its_latched;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic daq_busy, daq_reset;
  int n_daq_acc, n_daq_err;
  int checks = 0, failures = 0;

  cshine_trigger_top dut (
    .clk, .rst_n, .gamma_t, .ssd_m1, .ssd_m2, .ppac_t, .gamma_tdc,
    .trigger, .all_or, .mon_out,
    .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
    .daq_reset, .daq_busy, .fts, .its_latched);

  daq_model #(.DEAD_CYCLES(10000)) u_daq (
    .clk, .fts, .daq_busy, .daq_reset, .n_accepted(n_daq_acc), .n_errors(n_daq_err));

  always #10 clk = ~clk;
  initial #1 rst_n = 0;   // a real reset edge, before the first clock edge

  initial begin : watchdog
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- observation ----------------
  realtime t_trig_rise, t_all_rise, t_trig_fall, t_all_fall;
  int n_trig = 0, n_all = 0, n_fts = 0, n_trig_in_busy = 0;
  logic trig_q = 0, all_q = 0, fts_q = 0, mon_err = 0;
  int n_mon_bad = 0;
  logic trig_d1 = 0;

  always @(posedge clk) begin
    trig_q <= trigger; all_q <= all_or; fts_q <= fts; trig_d1 <= trigger;
    if (trigger && !trig_q) begin
      n_trig++;
      if (daq_busy) n_trig_in_busy++;
    end
    if (all_or && !all_q) n_all++;
    if (fts && !fts_q) n_fts++;
  end
  // edge times as the outputs change (right after the clock edge)
  always @(posedge trigger) t_trig_rise = $realtime;
  always @(negedge trigger) t_trig_fall = $realtime;
  always @(posedge all_or)  t_all_rise  = $realtime;
  realtime t_m2;
  always @(posedge dut.ppac_m2_sig) t_m2 = $realtime;
  always @(negedge all_or)  t_all_fall  = $realtime;

  // the final trigger must be low once busy has been seen for 4 cycles
  int busy_len = 0, n_fts_in_busy = 0;
  always @(negedge clk) begin
    busy_len = daq_busy ? busy_len + 1 : 0;
    if (busy_len > 4 && fts) n_fts_in_busy++;
  end

  // monitor output (default select = trigger) is the trigger one cycle late
  always @(negedge clk) if (rst_n && dut.mon_sel == 4'(M_TRIGGER) && mon_out != trig_d1) n_mon_bad++;

  // ---------------- mechanism counters ----------------
  int m_type [N_TRIG];
  real t_mon_rise = 0, t_mon_fall = 0;
  int m_pulser = 0;
  always @(posedge mon_out) t_mon_rise = $realtime;
  always @(negedge mon_out) t_mon_fall = $realtime;
  int m_veto = 0, m_mask = 0, m_delay = 0, m_clear = 0, m_inclusive_trig = 0, m_no_trigger = 0;

  // ---------------- SPI master ----------------
  task automatic spi_frame(logic [23:0] word, output logic [15:0] rd);
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
  task automatic spi_wr(logic [6:0] a, logic [15:0] d);
    logic [15:0] x;
    spi_frame({1'b1, a, d}, x);
  endtask
  task automatic spi_rd(logic [6:0] a, output logic [15:0] d);
    spi_frame({1'b0, a, 16'h0}, d);
  endtask
  task automatic spi_rd32(int idx, output logic [31:0] v);
    logic [15:0] lo, hi;
    spi_rd(7'(8'h40 + 2 * idx), lo);
    spi_rd(7'(8'h40 + 2 * idx + 1), hi);
    v = {hi, lo};
  endtask

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("[%0t] FAIL %s", $time, what); end
  endtask

  // ---------------- stimulus ----------------
  typedef struct {
    bit p1, p2, p3, s1, s2, g;
    int g_ch;
  } ev_t;

  realtime t_ev;

  // Drive one event. PPAC pulses at t0, gamma 20 ns later, SSD M1 100 ns
  // later, SSD M2 110 ns later (the silicon signals come through slower
  // shaping amplifiers).
  task automatic drive(ev_t e);
    @(posedge clk); #5;
    t_ev = $realtime;
    fork
      begin if (e.p1 | e.p2 | e.p3) begin
        ppac_t = {e.p3, e.p2, e.p1}; #160; ppac_t = '0; end end
      begin if (e.g) begin #20; gamma_t[e.g_ch] = 1; #120; gamma_t = '0; end end
      begin if (e.s1) begin #100; ssd_m1 = 1; #140; ssd_m1 = 0; end end
      begin if (e.s2) begin #110; ssd_m2 = 1; #200; ssd_m2 = 0; end end
    join
  endtask

  // Run one event and check trigger / ALL OR / final trigger.
  // exp_lat: trigger rise after t_ev in ns (<0: no trigger)
  // exp_all: ALL OR rise after t_ev in ns (<0: none)
  // exp_fts: 1 if the DAQ must accept it
  task automatic run_event(string name, ev_t e, real exp_lat, real exp_all, bit exp_fts);
    int trig0, all0, fts0;
    trig0 = n_trig; all0 = n_all; fts0 = n_fts;
    drive(e);
    repeat (100) @(posedge clk);
    if (exp_lat < 0) begin
      check({name, ": no trigger"}, n_trig == trig0);
    end else begin
      check({name, ": one trigger"}, n_trig == trig0 + 1);
      check($sformatf("%s: trigger latency %0.1f ns, expected %0.1f", name, t_trig_rise - t_ev, exp_lat),
            t_trig_rise - t_ev == exp_lat);
      check({name, ": trigger 400 ns"}, t_trig_fall - t_trig_rise == 400.0);
    end
    if (exp_all < 0) check({name, ": no ALL OR"}, n_all == all0);
    else begin
      check({name, ": one ALL OR"}, n_all == all0 + 1);
      check($sformatf("%s: ALL OR latency %0.1f, expected %0.1f", name, t_all_rise - t_ev, exp_all),
            t_all_rise - t_ev == exp_all);
      check({name, ": ALL OR 400 ns"}, t_all_fall - t_all_rise == 400.0);
    end
    check($sformatf("%s: final trigger %0d, expected %0d", name, n_fts - fts0, exp_fts),
          (n_fts - fts0) == int'(exp_fts));
  endtask

  task automatic wait_daq_idle();
    wait (!daq_busy && !its_latched);
    repeat (50) @(posedge clk);
  endtask

  initial begin
    ev_t e;
    logic [15:0] v;
    logic [31:0] sc;
    int types_fired [N_TRIG];
    for (int i = 0; i < N_TRIG; i++) m_type[i] = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);

    // 1. fission PPAC1 x 2 (ALL OR from the PPAC M1 path: 13 cycles - 5 ns)
    e = '{p1:1, p2:1, p3:0, s1:0, s2:0, g:0, g_ch:0};
    run_event("fission 1x2", e, 275.0, 255.0, 1);
    check($sformatf("PPAC M2 to trigger %0.1f ns, expected 200", t_trig_rise - t_m2), t_trig_rise - t_m2 == 200.0);
    // 2. another fission 2 us later, inside the dead time: vetoed
    repeat (100) @(posedge clk);
    check("DAQ busy during second event", daq_busy == 1);
    e = '{p1:1, p2:0, p3:1, s1:0, s2:0, g:0, g_ch:0};
    run_event("fission 1x3 in dead time", e, 275.0, 255.0, 0);
    if (n_trig_in_busy > 0) m_veto++;
    wait_daq_idle();
    // 3. fission with LCP and gamma: fission sync path is first
    e = '{p1:1, p2:0, p3:1, s1:1, s2:0, g:1, g_ch:5};
    run_event("fission+LCP+gamma", e, 135.0, 255.0, 1);
    wait_daq_idle();
    // 4. two-body LCP (M2 always comes with M1)
    e = '{p1:0, p2:0, p3:0, s1:1, s2:1, g:0, g_ch:0};
    run_event("two-body LCP", e, 375.0, 355.0, 1);
    wait_daq_idle();
    // 5. LCP & gamma
    e = '{p1:0, p2:0, p3:0, s1:1, s2:0, g:1, g_ch:11};
    run_event("LCP & gamma", e, 195.0, 295.0, 1);
    wait_daq_idle();
    // 6. inclusive only: one LCP, one gamma, one PPAC, PPAC2 x 3
    e = '{p1:0, p2:0, p3:0, s1:1, s2:0, g:0, g_ch:0};
    run_event("single LCP", e, -1.0, 355.0, 0);
    e = '{p1:0, p2:0, p3:0, s1:0, s2:0, g:1, g_ch:15};
    run_event("single gamma", e, -1.0, 295.0, 0);
    e = '{p1:1, p2:0, p3:0, s1:0, s2:0, g:0, g_ch:0};
    run_event("single PPAC1", e, -1.0, 255.0, 0);
    e = '{p1:0, p2:1, p3:1, s1:0, s2:0, g:0, g_ch:0};
    run_event("PPAC2 x 3", e, -1.0, 255.0, 0);
    m_no_trigger++;
    // gamma fan-out to the TDC is the raw input
    gamma_t = 16'hA5C3; #1;
    check("gamma TDC fan-out", gamma_tdc == 16'hA5C3);
    gamma_t = '0;
    repeat (30) @(posedge clk);

    // 7. mode switch: only "fission & LCP" enabled
    spi_wr(7'h20, 16'h0004);
    spi_rd(7'h20, v);
    check("mask readback", v == 16'h0004);
    m_mask++;
    e = '{p1:1, p2:1, p3:0, s1:0, s2:0, g:0, g_ch:0};
    run_event("fission masked", e, -1.0, 255.0, 0);
    // PPAC M2 & SSD M1: SSD M1 shaped at 100 ns + 3 cycles, sync 16 -> trigger
    e = '{p1:1, p2:1, p3:0, s1:1, s2:0, g:0, g_ch:0};
    run_event("fission & LCP only", e, 495.0, 255.0, 1);
    wait_daq_idle();
    // inclusive trigger enabled
    spi_wr(7'h20, 16'h0020);
    m_mask++;
    e = '{p1:0, p2:0, p3:0, s1:1, s2:0, g:0, g_ch:0};
    run_event("inclusive trigger", e, 375.0, 355.0, 1);
    m_inclusive_trig++;
    wait_daq_idle();
    spi_wr(7'h20, 16'h001F);

    // 8. delay change: fission sync delay 200 -> 400 ns (20 cycles)
    spi_wr(7'(G_SYNC0 + T_PPAC_M2), {8'd10, 8'd20});
    m_delay++;
    e = '{p1:1, p2:1, p3:0, s1:0, s2:0, g:0, g_ch:0};
    run_event("fission, 400 ns sync delay", e, 475.0, 255.0, 1);
    wait_daq_idle();
    spi_wr(7'(G_SYNC0 + T_PPAC_M2), 16'h0A0A);

    // 9. scalers against the testbench's own counts
    spi_rd32(M_TRIGGER, sc);
    check($sformatf("trigger scaler %0d vs %0d", sc, n_trig), sc == 32'(n_trig));
    spi_rd32(M_SYNC0 + T_ALL_OR, sc);
    check($sformatf("ALL OR scaler %0d vs %0d", sc, n_all), sc == 32'(n_all));
    for (int i = 0; i < N_TRIG; i++) begin
      spi_rd32(M_SYNC0 + i, sc);
      m_type[i] = int'(sc);
    end
    // events above: fission in 1,2,3,7a,7b,8 ; SSD M2 in 4 ; PPAC&SSD in 3,7b ;
    // PPAC&gamma in 3 ; SSD&gamma in 3,5
    check("fission scaler", m_type[T_PPAC_M2] == 6);
    check("SSD M2 scaler", m_type[T_SSD_M2] == 1);
    check("PPAC&SSD scaler", m_type[T_PPAC_SSD] == 2);
    check("PPAC&gamma scaler", m_type[T_PPAC_GAMMA] == 1);
    check("SSD&gamma scaler", m_type[T_SSD_GAMMA] == 2);
    spi_wr(7'h22, 16'h0001);
    spi_rd32(M_TRIGGER, sc);
    check("scalers cleared", sc == 0);
    m_clear++;

    // 10. pulser test of one GDG: PPAC1 T on the monitor output, its delay
    // set to 40 ns. Latency = 15 ns to the sampling edge + 2 synchroniser
    // cycles + the GDG delay + 1 monitor register cycle.
    spi_wr(7'h21, 16'(M_PPAC_T0));
    for (int d = 1; d <= 2; d++) begin
      real t0;
      spi_wr(7'(G_PPAC_T0), {8'd20, 8'(d)});
      @(posedge clk); #5;
      ppac_t[0] = 1; t0 = $realtime;
      #160 ppac_t[0] = 0;
      repeat (40) @(posedge clk);
      check($sformatf("PPAC1 T delay %0d ns: monitor edge after %0.1f ns, expected %0d",
                      20 * d, t_mon_rise - t0, 55 + 20 * d), t_mon_rise - t0 == real'(55 + 20 * d));
      check($sformatf("PPAC1 T width 400 ns on monitor: %0.1f", t_mon_fall - t_mon_rise),
            t_mon_fall - t_mon_rise == 400.0);
      m_pulser++;
    end
    spi_wr(7'(G_PPAC_T0), 16'h1401);
    spi_wr(7'h21, 16'(M_TRIGGER));

    // DAQ side: never a final trigger while busy
    check("no final trigger during busy", n_daq_err == 0);
    check($sformatf("final trigger vetoed while busy (%0d cycles high)", n_fts_in_busy), n_fts_in_busy == 0);
    check("accepted events = final triggers", n_daq_acc == n_fts);
    check("monitor output follows trigger", n_mon_bad == 0);

    // every mechanism must have happened
    for (int i = 0; i < N_TRIG; i++)
      check($sformatf("trigger type %0d seen (%0d)", i, m_type[i]), m_type[i] > 0);
    check($sformatf("busy veto seen (%0d)", n_trig_in_busy), m_veto > 0);
    check("mask switch", m_mask > 0);
    check("delay reconfiguration", m_delay > 0);
    check("scaler clear", m_clear > 0);
    check("GDG pulser test on the monitor output", m_pulser > 0);
    check("inclusive in trigger", m_inclusive_trig > 0);
    check("events without trigger", m_no_trigger > 0);
    $display("mechanisms: fission=%0d ssdM2=%0d ppac&ssd=%0d ppac&gamma=%0d ssd&gamma=%0d allor=%0d veto=%0d mask=%0d delay=%0d clear=%0d",
             m_type[0], m_type[1], m_type[2], m_type[3], m_type[4], m_type[5], n_trig_in_busy, m_mask, m_delay, m_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

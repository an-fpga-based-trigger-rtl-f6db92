// Testbench for daq_interrupt. A small DAQ model raises busy a few cycles
// after each final trigger, keeps it for a dead time, then pulses reset and
// drops busy. Checks: the first trigger passes (fts rises 2 cycles after
// the ITS edge), triggers during the dead time produce no fts, the latch
// holds until reset, and a trigger after the dead time passes again.
`timescale 1ns/1ps
module tb_daq_interrupt;
  logic clk = 0, rst_n = 1, its = 0, daq_reset = 0, daq_busy = 0;
  logic latched, fts;
  int checks = 0, failures = 0;
  int n_fts_edges = 0;
  logic fts_q = 0;

  daq_interrupt dut (.clk, .rst_n, .its, .daq_reset, .daq_busy, .latched, .fts);

  always #10 clk = ~clk;
  initial #1 rst_n = 0;   // a real reset edge, before the first clock edge

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    fts_q <= fts;
    if (fts && !fts_q) n_fts_edges++;
  end

  // DAQ: busy 3 cycles after fts rises, dead time 200 cycles, then reset pulse
  initial begin
    forever begin
      @(posedge clk iff (fts && !fts_q));
      repeat (3) @(posedge clk);
      #1 daq_busy = 1;
      repeat (200) @(posedge clk);
      #1 daq_reset = 1;
      repeat (2) @(posedge clk);
      #1 daq_reset = 0; daq_busy = 0;
    end
  end

  task automatic pulse_its(int len);
    @(posedge clk); #1 its = 1;
    repeat (len) @(posedge clk);
    #1 its = 0;
  endtask

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0d, expected %0d", what, got, exp); end
  endtask

  initial begin
    int t0, t_rise;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    expect_eq("fts idle", int'(fts), 0);
    // first trigger: its high in cycle 0 -> latch in 1 -> fts in 2
    @(posedge clk); #1 its = 1;
    t_rise = -1;
    for (int k = 1; k < 10; k++) begin
      @(posedge clk); #1 its = (k < 20);
      #8 if (fts && t_rise < 0) t_rise = k;
    end
    #1 its = 0;
    expect_eq("fts latency", t_rise, 2);
    expect_eq("latched", int'(latched), 1);
    // wait until busy is seen, fts must go low
    wait (daq_busy);
    repeat (4) @(posedge clk); #1;
    expect_eq("fts vetoed by busy", int'(fts), 0);
    // triggers during dead time
    repeat (3) begin
      repeat (20) @(posedge clk);
      pulse_its(5);
    end
    repeat (5) @(posedge clk);
    expect_eq("latch held during dead time", int'(latched), 1);
    expect_eq("fts edges so far", n_fts_edges, 1);
    // after reset, latch clears
    wait (daq_reset);
    repeat (5) @(posedge clk); #1;
    expect_eq("latch cleared by reset", int'(latched), 0);
    expect_eq("fts low after reset", int'(fts), 0);
    repeat (20) @(posedge clk);
    pulse_its(3);
    repeat (6) @(posedge clk);
    expect_eq("second accepted trigger", n_fts_edges, 2);
    wait (daq_reset);
    wait (!daq_busy);
    repeat (10) @(posedge clk);
    // reset without trigger keeps everything low
    expect_eq("idle again", int'(fts), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

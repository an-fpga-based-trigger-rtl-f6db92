// Testbench for monitor_bank: random pulse trains on the 13 inputs; the
// testbench counts rising edges itself and compares each scaler, checks
// that clear zeroes them, and that mon_out equals sig[sel] of the previous
// cycle for every select value (0 for selects past the last input).
`timescale 1ns/1ps
module tb_monitor_bank;
  localparam int N = 13;
  logic clk = 0, rst_n = 1, clear = 0, mon_out;
  logic [N-1:0] sig = '0, sig_prev;
  logic [3:0] sel = '0;
  logic [31:0] count [N];
  int ref_cnt [N];
  int checks = 0, failures = 0;

  monitor_bank #(.N_MON(N), .CNT_W(32)) dut (.clk, .rst_n, .sig, .clear, .sel, .mon_out, .count);

  always #10 clk = ~clk;
  initial #1 rst_n = 0;   // a real reset edge, before the first clock edge

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_counts(string tag);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (count[i] != 32'(ref_cnt[i])) begin
        failures++;
        $display("%s: scaler %0d = %0d, expected %0d", tag, i, count[i], ref_cnt[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) ref_cnt[i] = 0;
    sig_prev = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      for (int k = 0; k < 3000; k++) begin
        logic [N-1:0] prev_drive;
        @(posedge clk); #1;
        prev_drive = sig;
        sig = N'($urandom) & N'($urandom);
        sel = 4'($urandom_range(0, 15));
        for (int i = 0; i < N; i++) if (sig[i] && !prev_drive[i]) ref_cnt[i]++;
        @(posedge clk); #1;   // hold one more cycle, check mon_out
        checks++;
        if (mon_out != ((sel < N) ? sig[sel] : 1'b0)) begin
          failures++;
          if (failures < 10) $display("mon_out %0b for sel %0d", mon_out, sel);
        end
      end
      @(posedge clk); #1 sig = '0;
      @(posedge clk); #1;
      compare_counts("run");
      clear = 1;
      @(posedge clk); #1 clear = 0;
      for (int i = 0; i < N; i++) ref_cnt[i] = 0;
      compare_counts("after clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

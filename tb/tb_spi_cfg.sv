// Testbench for spi_cfg. An SPI mode-0 master (SCLK = clk/8) reads every
// GDG register after reset and compares it with the published settings,
// written here in nanoseconds and divided by the 20 ns clock; writes and
// reads back random settings, the trigger mask and the monitor select;
// reads the scalers (driven by the testbench) in 16-bit halves; checks the
// scaler-clear pulse; and checks that a frame of the wrong length writes
// nothing.
`timescale 1ns/1ps
module tb_spi_cfg;
  import trigger_pkg::*;

  logic clk = 0, rst_n = 1;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  gdg_cfg_t gdg_cfg [N_GDG];
  logic [N_TRIG-1:0] trig_mask;
  logic [3:0] mon_sel;
  logic scaler_clear;
  logic [31:0] scaler [N_MON];
  int checks = 0, failures = 0, n_clear = 0;

  spi_cfg #(.N_SCAL(N_MON), .CNT_W(32)) dut (
    .clk, .rst_n, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
    .gdg_cfg, .trig_mask, .mon_sel, .scaler_clear, .scaler);

  always #10 clk = ~clk;
  initial #1 rst_n = 0;   // a real reset edge, before the first clock edge
  always @(posedge clk) if (rst_n && scaler_clear) n_clear++;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one frame of nbits (24 normally); returns the last 16 bits seen on MISO
  task automatic frame(logic [23:0] word, int nbits, output logic [15:0] rd);
    rd = '0;
    cs_n = 0;
    repeat (4) @(posedge clk);
    for (int b = 23; b > 23 - nbits; b--) begin
      mosi = word[b];
      repeat (4) @(posedge clk);
      sclk = 1;                   // both sides sample on this edge
      rd = {rd[14:0], miso};
      repeat (4) @(posedge clk);
      sclk = 0;
    end
    repeat (4) @(posedge clk);
    cs_n = 1;
    repeat (8) @(posedge clk);
  endtask

  task automatic wr(logic [6:0] a, logic [15:0] d);
    logic [15:0] dummy;
    frame({1'b1, a, d}, 24, dummy);
  endtask

  task automatic rd(logic [6:0] a, output logic [15:0] d);
    frame({1'b0, a, 16'h0}, 24, d);
  endtask

  task automatic expect16(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: %h, expected %h", what, got, exp); end
  endtask

  // published delay/width in ns, per channel
  function automatic logic [15:0] published(int ch);
    int d, w;
    if (ch < 16) begin d = 0; w = 80; end
    else case (ch)
      16: begin d = 20;  w = 80;  end   // gamma M1
      17: begin d = 20;  w = 80;  end   // SSD M1
      18: begin d = 20;  w = 320; end   // SSD M2
      19, 20, 21: begin d = 20; w = 400; end  // PPAC1-3 T
      22: begin d = 0;   w = 640; end   // PPAC M2
      23: begin d = 200; w = 200; end   // sync PPAC M2
      24: begin d = 200; w = 320; end   // sync SSD M2
      25: begin d = 320; w = 320; end   // sync PPAC M2 & SSD M1
      26: begin d = 0;   w = 320; end   // sync PPAC M2 & gamma M1
      27: begin d = 0;   w = 320; end   // sync SSD M1 & gamma M1
      28: begin d = 200; w = 400; end   // ALL OR
      default: begin d = 0; w = 400; end  // Trigger
    endcase
    return {8'(w / 20), 8'(d / 20)};
  endfunction

  initial begin
    logic [15:0] v;
    logic [15:0] shadow [N_GDG];
    for (int i = 0; i < N_MON; i++) scaler[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    // reset values
    for (int ch = 0; ch < N_GDG; ch++) begin
      rd(7'(ch), v);
      expect16($sformatf("reset GDG %0d", ch), v, published(ch));
      expect16($sformatf("reset GDG %0d port", ch), gdg_cfg[ch], published(ch));
    end
    rd(7'h20, v); expect16("reset mask", v, 16'h001F);
    rd(7'h21, v); expect16("reset monitor select", v, 16'd12);
    // random writes
    for (int ch = 0; ch < N_GDG; ch++) begin
      shadow[ch] = 16'($urandom);
      wr(7'(ch), shadow[ch]);
    end
    for (int ch = N_GDG - 1; ch >= 0; ch--) begin
      rd(7'(ch), v);
      expect16($sformatf("GDG %0d readback", ch), v, shadow[ch]);
      expect16($sformatf("GDG %0d port", ch), gdg_cfg[ch], shadow[ch]);
    end
    wr(7'h20, 16'h0025); rd(7'h20, v); expect16("mask", v, 16'h0025);
    expect16("mask port", 16'(trig_mask), 16'h0025);
    wr(7'h21, 16'h0003); expect16("mon_sel port", 16'(mon_sel), 16'h0003);
    // scalers
    for (int i = 0; i < N_MON; i++) begin
      rd(7'(8'h40 + 2 * i), v);     expect16($sformatf("scaler %0d lo", i), v, scaler[i][15:0]);
      rd(7'(8'h40 + 2 * i + 1), v); expect16($sformatf("scaler %0d hi", i), v, scaler[i][31:16]);
    end
    rd(7'h7F, v); expect16("unused address", v, 16'h0);
    // clear pulse
    wr(7'h22, 16'h0001);
    expect16("one clear pulse", 16'(n_clear), 16'd1);
    // short frame must not write
    frame({1'b1, 7'd5, 16'hABCD}, 20, v);
    rd(7'd5, v); expect16("short frame ignored", v, shadow[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

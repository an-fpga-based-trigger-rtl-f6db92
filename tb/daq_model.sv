// daq_model - behavioural model of the VME readout seen from the trigger
// (not synthesizable, testbench use only).
//
// On each rising edge of the final trigger it raises busy after
// BUSY_LAT cycles, stays busy for DEAD_CYCLES (the conversion and readout
// dead time, about 200 us = 10000 cycles of 50 MHz in the experiment),
// then pulses reset for two cycles and drops busy, as the VME controller's
// two NIM outputs do. Rising edges of fts while busy are counted as
// errors: the veto circuit must make them impossible.
`timescale 1ns/1ps
module daq_model #(
  parameter int unsigned DEAD_CYCLES = 10000,
  parameter int unsigned BUSY_LAT    = 10
) (
  input  logic clk,
  input  logic fts,
  output logic daq_busy,
  output logic daq_reset,
  output int   n_accepted,
  output int   n_errors
);
  logic fts_q = 1'b0;
  initial begin
    daq_busy = 1'b0; daq_reset = 1'b0; n_accepted = 0; n_errors = 0;
  end

  always @(posedge clk) begin
    fts_q <= fts;
    if (fts && !fts_q && daq_busy) n_errors++;
  end

  initial begin
    forever begin
      @(posedge clk iff (fts && !fts_q && !daq_busy));
      n_accepted++;
      repeat (BUSY_LAT) @(posedge clk);
      #2 daq_busy = 1'b1;
      repeat (DEAD_CYCLES) @(posedge clk);
      #2 daq_reset = 1'b1;
      repeat (2) @(posedge clk);
      #2 daq_reset = 1'b0; daq_busy = 1'b0;
    end
  end
endmodule

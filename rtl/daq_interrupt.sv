// daq_interrupt - busy/veto circuit between the trigger and the DAQ.
//
// The DAQ cannot accept a new trigger before it has finished reading the
// previous event. The initial trigger signal (ITS, the global trigger)
// sets a latch that stays set until the DAQ controller pulses its reset
// line (Output-0), sent when the event is stored. The final trigger signal
// (FTS) sent to the DAQ is the latch vetoed by the DAQ busy level
// (Output-1): FTS = latch & ~busy. So the first trigger passes at once; once
// the DAQ raises busy, FTS drops and further triggers are blocked, both by
// the veto and by the latch that is already set.
//
// In the experiment the latch is a NIM timer (N93B) with its time set to
// infinity and the veto gate a NIM logic unit (N405). Here the same logic
// is clocked at the trigger clock. its is synchronous to clk; daq_reset and
// daq_busy come from outside and pass a two-flop synchroniser. The latch is
// set in the cycle after the first ITS edge; fts is registered and rises
// one cycle after the latch. Reset wins over a simultaneous ITS edge.
module daq_interrupt (
  input  logic clk,
  input  logic rst_n,
  input  logic its,
  input  logic daq_reset,
  input  logic daq_busy,
  output logic latched,
  output logic fts
);
  logic its_q;
  logic reset_s, busy_s;

  sync2 #(.W(2)) u_sync (
    .clk, .rst_n,
    .async_in({daq_reset, daq_busy}),
    .sync_out({reset_s, busy_s})
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      its_q   <= 1'b0;
      latched <= 1'b0;
      fts     <= 1'b0;
    end else begin
      its_q <= its;
      if (reset_s)           latched <= 1'b0;
      else if (its && !its_q) latched <= 1'b1;
      fts <= latched & ~busy_s;
    end
  end
endmodule

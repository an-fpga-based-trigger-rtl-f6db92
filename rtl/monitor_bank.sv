// monitor_bank - the monitoring points of the trigger logic.
//
// Every monitored signal has a rising-edge counter (a scaler), so the rate
// of each trigger stage can be read by the host, and one signal, chosen by
// sel, is copied to mon_out for an oscilloscope.
//
// Interface: sig is synchronous to clk. clear zeroes all counters in the
// next cycle. count[i] increments in the cycle after sig[i] is first seen
// high and wraps at 2**CNT_W. mon_out is sig[sel] through one register
// (one cycle late); sel beyond N_MON-1 gives 0.
//
// The source only marks where monitor points are; what they do here
// (counting and one selectable output) is this design's choice.
module monitor_bank #(
  parameter int unsigned N_MON = 13,
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_MON-1:0] sig,
  input  logic             clear,
  input  logic [3:0]       sel,
  output logic             mon_out,
  output logic [CNT_W-1:0] count [N_MON]
);
  logic [N_MON-1:0] sig_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sig_q   <= '0;
      mon_out <= 1'b0;
      for (int i = 0; i < N_MON; i++) count[i] <= '0;
    end else begin
      sig_q   <= sig;
      mon_out <= (32'(sel) < N_MON) ? sig[sel] : 1'b0;
      for (int i = 0; i < N_MON; i++) begin
        if (clear)                    count[i] <= '0;
        else if (sig[i] && !sig_q[i]) count[i] <= count[i] + 1'b1;
      end
    end
  end
endmodule

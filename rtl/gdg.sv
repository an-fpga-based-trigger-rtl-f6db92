// gdg - one channel of the Gate and Delay Generator.
//
// What it does: every rising edge of in_sig produces one output pulse of
// cfg.width clock cycles, starting cfg.delay cycles after the edge is seen.
// This is the delay-and-broadening element the trigger uses to line signals
// up before a coincidence and to give every trigger type a fixed length.
//
// How: the one-cycle edge pulse enters a shift register (the delay line),
// so several edges may travel through the delay at once; the tap chosen by
// cfg.delay starts a down-counter that holds the output high for cfg.width
// cycles. While the output is high further edges are ignored
// (non-retriggerable).
//
// Timing: if in_sig is first high in cycle c, out_sig is high in cycles
// c+max(delay,1) .. c+max(delay,1)+width-1. The one cycle of the output
// register counts as part of the delay, so delays of 0 and 20 ns both give
// one cycle. width = 0 switches the channel off. cfg may change at any time;
// an edge already inside the delay line uses the tap current when it arrives.
//
// Following the source: edge in, delayed and widened pulse out, settings in
// 20 ns steps of the 50 MHz clock. Own choices: delay-line structure,
// non-retriggering, 8-bit fields, latency convention.
module gdg
  import trigger_pkg::*;
#(
  parameter int unsigned CNT_W = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_sig,
  input  gdg_cfg_t cfg,
  output logic     out_sig
);
  localparam int unsigned MAXD = (1 << CNT_W) - 1;

  logic             in_q;
  logic             edge_p;
  logic [MAXD-1:1]  dline;      // dline[i] = edge_p delayed by i cycles
  logic             fire;
  logic [CNT_W-1:0] remain;

  assign edge_p = in_sig & ~in_q;

  always_comb begin
    if (cfg.delay <= 8'd1) fire = edge_p;
    else                   fire = dline[CNT_W'(cfg.delay) - 1'b1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_q   <= 1'b0;
      dline  <= '0;
      remain <= '0;
    end else begin
      in_q  <= in_sig;
      dline <= {dline[MAXD-2:1], edge_p};
      if (remain != '0)  remain <= remain - 1'b1;
      else if (fire)     remain <= CNT_W'(cfg.width);
    end
  end

  assign out_sig = (remain != '0);
endmodule

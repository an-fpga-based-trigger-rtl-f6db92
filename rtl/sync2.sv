// Two-flop synchroniser for a bundle of asynchronous logic levels.
//
// Each bit of async_in is sampled by two flip-flops in series on clk, so
// sync_out follows the input two to three cycles later, with the
// metastability window confined to the first stage. Reset clears both
// stages. Used on every front-end logic input and on the DAQ levels; the
// synchroniser itself is this design's choice, the source says nothing
// about how the inputs are brought into the clock domain.
module sync2 #(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] async_in,
  output logic [W-1:0] sync_out
);
  logic [W-1:0] meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta     <= '0;
      sync_out <= '0;
    end else begin
      meta     <= async_in;
      sync_out <= meta;
    end
  end
endmodule

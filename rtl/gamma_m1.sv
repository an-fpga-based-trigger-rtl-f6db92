// gamma_m1 - one-body gamma signal from the gamma hodoscope.
//
// The fast timing output of every crystal's N914 amplifier passes its own
// GDG channel, the shaped channels are OR-reduced, and the OR passes the
// "gamma M1" GDG. The result is high when at least one crystal fired.
//
// Interface: N_CH inputs (16 by default). gamma_t must already be synchronous to clk. cfg_ch holds the
// per-crystal GDG settings, cfg_m1 the gamma M1 setting.
// Timing: with the defaults (per-crystal 0 ns/80 ns, M1 20 ns/80 ns) the
// output rises two cycles after the first input edge and lasts 4 cycles.
//
// The structure GDG -> OR_REDUCE -> GDG and the 16-wide input follow the
// logic diagram of the trigger; the per-crystal settings are this design's
// own defaults since the source gives settings only for gamma M1.
module gamma_m1
  import trigger_pkg::*;
#(
  parameter int unsigned N_CH = trigger_pkg::N_GAMMA
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N_CH-1:0]    gamma_t,
  input  gdg_cfg_t              cfg_ch [N_CH],
  input  gdg_cfg_t              cfg_m1,
  output logic                  m1_out
);
  logic [N_CH-1:0] shaped;
  logic               any_fired;

  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    gdg u_gdg (.clk, .rst_n, .in_sig(gamma_t[i]), .cfg(cfg_ch[i]), .out_sig(shaped[i]));
  end

  assign any_fired = |shaped;   // OR_REDUCE

  gdg u_m1 (.clk, .rst_n, .in_sig(any_fired), .cfg(cfg_m1), .out_sig(m1_out));
endmodule

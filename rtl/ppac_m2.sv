// ppac_m2 - fission-event coincidence of the three PPACs.
//
// PPAC1 is the main fission-fragment counter; PPAC2 and PPAC3 sit on the
// other side of the beam. Each cathode timing signal is shaped by a GDG
// (default 20 ns delay, 400 ns width). A fission event is
//   PPAC M2 = (PPAC1 & PPAC2) | (PPAC1 & PPAC3)
// PPAC2 and PPAC3 are never put in coincidence with each other, because
// they are on the same side of the beam. The OR leaves twice: unshaped on
// 'fission', which feeds the fission trigger's synchronisation GDG, and
// shaped by the PPAC M2 GDG (default 0 ns delay, 640 ns width) on m2_out,
// which feeds the coincidences with an LCP or a gamma. The one-body signal
// PPAC M1 is the OR of the three shaped T signals and feeds the inclusive
// trigger.
//
// Interface: ppac_t[0..2] = PPAC1..3, synchronous to clk. ppac_t_gdg are the
// shaped T signals (monitor points). fission and ppac_m1 are combinational
// from GDG registers. Timing: fission rises max(dT,1) cycles and m2_out
// max(dT,1)+1 cycles after the later of the two coincident T edges.
//
// Logic, wiring and settings follow the source; the GDG latency convention
// is this design's (see gdg).
module ppac_m2
  import trigger_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] ppac_t,
  input  gdg_cfg_t   cfg_t [3],
  input  gdg_cfg_t   cfg_m2,
  output logic [2:0] ppac_t_gdg,
  output logic       fission,
  output logic       m2_out,
  output logic       ppac_m1
);
  logic ppac1x2, ppac1x3;

  for (genvar i = 0; i < 3; i++) begin : g_t
    gdg u_gdg (.clk, .rst_n, .in_sig(ppac_t[i]), .cfg(cfg_t[i]), .out_sig(ppac_t_gdg[i]));
  end

  assign ppac1x2 = ppac_t_gdg[0] & ppac_t_gdg[1];
  assign ppac1x3 = ppac_t_gdg[0] & ppac_t_gdg[2];
  assign fission = ppac1x2 | ppac1x3;
  assign ppac_m1 = |ppac_t_gdg;

  gdg u_m2 (.clk, .rst_n, .in_sig(fission), .cfg(cfg_m2), .out_sig(m2_out));
endmodule

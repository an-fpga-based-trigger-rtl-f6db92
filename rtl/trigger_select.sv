// trigger_select - event-type coincidences, synchronisation and the global
// trigger.
//
// From the shaped detector signals it forms the six event types
//   0 fission              PPAC M2 (unshaped OR)
//   1 two-body LCP         SSD M2
//   2 fission & 1 LCP      PPAC M2 (shaped) & SSD M1
//   3 fission & 1 gamma    PPAC M2 (shaped) & gamma M1
//   4 LCP & gamma          SSD M1 & gamma M1
//   5 inclusive (ALL OR)   SSD M1 | gamma M1 | PPAC M1
// Each type passes its own synchronisation GDG, which moves it to a common
// time and gives it a fixed width (cfg_sync[i]). The enabled types
// (trig_mask) are ORed and shaped by the Trigger GDG into the global
// trigger. The synchronised ALL OR also leaves on its own output, all_or,
// whatever the mask. By default type 5 is not part of the trigger, as in
// the logic diagram; setting mask bit 5 adds it, as the event-type list of
// the source suggests.
//
// Interface: all inputs synchronous to clk. sync_out[i] are the
// synchronised types (monitor points). Timing: trigger rises
// max(d_sync,1) + 1 cycles after the coincidence forms (Trigger delay 0).
//
// The gates and settings follow the source; the mask is this design's way
// to make the trigger selectable by register.
module trigger_select
  import trigger_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              gamma_m1,
  input  logic              ssd_m1,
  input  logic              ssd_m2,
  input  logic              fission,
  input  logic              ppac_m2,
  input  logic              ppac_m1,
  input  gdg_cfg_t          cfg_sync [N_TRIG],
  input  gdg_cfg_t          cfg_trig,
  input  logic [N_TRIG-1:0] trig_mask,
  output logic [N_TRIG-1:0] sync_out,
  output logic              trigger,
  output logic              all_or
);
  logic [N_TRIG-1:0] evt;
  logic              any_enabled;

  always_comb begin
    evt               = '0;
    evt[T_PPAC_M2]    = fission;
    evt[T_SSD_M2]     = ssd_m2;
    evt[T_PPAC_SSD]   = ppac_m2 & ssd_m1;
    evt[T_PPAC_GAMMA] = ppac_m2 & gamma_m1;
    evt[T_SSD_GAMMA]  = ssd_m1 & gamma_m1;
    evt[T_ALL_OR]     = ssd_m1 | gamma_m1 | ppac_m1;
  end

  for (genvar i = 0; i < N_TRIG; i++) begin : g_sync
    gdg u_gdg (.clk, .rst_n, .in_sig(evt[i]), .cfg(cfg_sync[i]), .out_sig(sync_out[i]));
  end

  assign any_enabled = |(sync_out & trig_mask);
  assign all_or      = sync_out[T_ALL_OR];

  gdg u_trig (.clk, .rst_n, .in_sig(any_enabled), .cfg(cfg_trig), .out_sig(trigger));
endmodule

// cshine_trigger_top - the CSHINE trigger system.
//
// Inputs are the logic signals of the front-end electronics: 16 gamma
// crystal timings (N914 fast outputs), SSD M1 (any DSSSD strip fired) and
// SSD M2 (summed strip multiplicity >= 2) from the silicon telescopes, and
// the cathode timings of PPAC1-3. After a two-flop synchroniser each
// detector path is shaped by Gate and Delay Generator (GDG) channels:
//   gamma:  GDG per crystal -> OR -> GDG                 -> gamma M1
//   SSD:    GDG (SSD M1), GDG (SSD M2)
//   PPAC:   GDG per PPAC -> (1&2)|(1&3)                  -> fission
//                                       -> GDG            -> PPAC M2
//                        -> 1|2|3                         -> PPAC M1
// trigger_select forms the event types, synchronises them and ORs the
// enabled ones into the global trigger; the inclusive ALL OR has its own
// output. The global trigger then passes the DAQ busy/veto circuit, which
// gives the final trigger fts. Thirteen monitor points count edges and can
// be routed to mon_out. Every delay, width, the trigger mask and the monitor
// choice are registers written over SPI (see spi_cfg for the map).
//
// Clock 50 MHz; all settings are in 20 ns cycles. With the reset settings
// a PPAC1 & PPAC2 coincidence gives a 400 ns trigger 14 cycles after the
// clock edge that follows the PPAC edges (260-280 ns after they arrive),
// and 10 cycles (200 ns) after the shaped PPAC M2 rises.
// gamma_tdc is a plain copy of the gamma inputs for the TDC, not
// resynchronised, so the TDC keeps the full timing resolution.
//
// Structure, logic and settings follow the source; synchronisers, polarity
// (active high inside), monitor function and the SPI register map are this
// design's choices.
module cshine_trigger_top
  import trigger_pkg::*;
#(
  parameter int unsigned GAMMA_CH = trigger_pkg::N_GAMMA
) (
  input  logic               clk,
  input  logic               rst_n,
  // front-end logic signals (asynchronous)
  input  logic [GAMMA_CH-1:0] gamma_t,
  input  logic               ssd_m1,
  input  logic               ssd_m2,
  input  logic [2:0]         ppac_t,
  output logic [GAMMA_CH-1:0] gamma_tdc,
  // trigger outputs
  output logic               trigger,
  output logic               all_or,
  output logic               mon_out,
  // remote configuration
  input  logic               spi_sclk,
  input  logic               spi_cs_n,
  input  logic               spi_mosi,
  output logic               spi_miso,
  // DAQ controller levels and final trigger
  input  logic               daq_reset,
  input  logic               daq_busy,
  output logic               fts,
  output logic               its_latched
);
  logic [GAMMA_CH-1:0] gamma_s;
  logic               ssd_m1_s, ssd_m2_s;
  logic [2:0]         ppac_s;

  gdg_cfg_t           gdg_cfg [N_GDG];
  gdg_cfg_t           cfg_gamma [GAMMA_CH];
  gdg_cfg_t           cfg_ppac [3];
  gdg_cfg_t           cfg_sync [N_TRIG];
  logic [N_TRIG-1:0]  trig_mask;
  logic [3:0]         mon_sel;
  logic               scaler_clear;
  logic [31:0]        scaler [N_MON];

  logic               gamma_m1_sig, ssd_m1_g, ssd_m2_g, fission_sig, ppac_m2_sig, ppac_m1_sig;
  logic [2:0]         ppac_t_g;
  logic [N_TRIG-1:0]  sync_out;
  logic [N_MON-1:0]   mon_sig;

  assign gamma_tdc = gamma_t;

  sync2 #(.W(GAMMA_CH + 5)) u_in_sync (
    .clk, .rst_n,
    .async_in({gamma_t, ssd_m1, ssd_m2, ppac_t}),
    .sync_out({gamma_s, ssd_m1_s, ssd_m2_s, ppac_s})
  );

  for (genvar i = 0; i < GAMMA_CH; i++) begin : g_cfg_gamma
    assign cfg_gamma[i] = gdg_cfg[(G_GAMMA0 + i) % G_GAMMA_M1];
  end
  for (genvar i = 0; i < 3; i++) begin : g_cfg_ppac
    assign cfg_ppac[i] = gdg_cfg[G_PPAC_T0 + i];
  end
  for (genvar i = 0; i < N_TRIG; i++) begin : g_cfg_sync
    assign cfg_sync[i] = gdg_cfg[G_SYNC0 + i];
  end

  gamma_m1 #(.N_CH(GAMMA_CH)) u_gamma (
    .clk, .rst_n, .gamma_t(gamma_s), .cfg_ch(cfg_gamma),
    .cfg_m1(gdg_cfg[G_GAMMA_M1]), .m1_out(gamma_m1_sig)
  );

  gdg u_ssd_m1 (.clk, .rst_n, .in_sig(ssd_m1_s), .cfg(gdg_cfg[G_SSD_M1]), .out_sig(ssd_m1_g));
  gdg u_ssd_m2 (.clk, .rst_n, .in_sig(ssd_m2_s), .cfg(gdg_cfg[G_SSD_M2]), .out_sig(ssd_m2_g));

  ppac_m2 u_ppac (
    .clk, .rst_n, .ppac_t(ppac_s), .cfg_t(cfg_ppac), .cfg_m2(gdg_cfg[G_PPAC_M2]),
    .ppac_t_gdg(ppac_t_g), .fission(fission_sig), .m2_out(ppac_m2_sig), .ppac_m1(ppac_m1_sig)
  );

  trigger_select u_sel (
    .clk, .rst_n,
    .gamma_m1(gamma_m1_sig), .ssd_m1(ssd_m1_g), .ssd_m2(ssd_m2_g),
    .fission(fission_sig), .ppac_m2(ppac_m2_sig), .ppac_m1(ppac_m1_sig),
    .cfg_sync, .cfg_trig(gdg_cfg[G_TRIGGER]), .trig_mask,
    .sync_out, .trigger, .all_or
  );

  always_comb begin
    mon_sig                        = '0;
    mon_sig[M_GAMMA_M1]            = gamma_m1_sig;
    mon_sig[M_SSD_M1]              = ssd_m1_g;
    mon_sig[M_SSD_M2]              = ssd_m2_g;
    mon_sig[M_PPAC_T0 +: 3]        = ppac_t_g;
    mon_sig[M_SYNC0 +: N_TRIG]     = sync_out;
    mon_sig[M_TRIGGER]             = trigger;
  end

  monitor_bank #(.N_MON(N_MON), .CNT_W(32)) u_mon (
    .clk, .rst_n, .sig(mon_sig), .clear(scaler_clear), .sel(mon_sel),
    .mon_out, .count(scaler)
  );

  spi_cfg #(.N_SCAL(N_MON), .CNT_W(32)) u_cfg (
    .clk, .rst_n, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .gdg_cfg, .trig_mask, .mon_sel, .scaler_clear, .scaler
  );

  daq_interrupt u_daq (
    .clk, .rst_n, .its(trigger), .daq_reset, .daq_busy,
    .latched(its_latched), .fts
  );
endmodule

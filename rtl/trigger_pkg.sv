// Shared types and constants of the CSHINE trigger logic.
//
// The logic runs from one 50 MHz clock (20 ns period), so every delay and
// width is a whole number of clock cycles. Each Gate and Delay Generator
// (GDG) channel is set by a gdg_cfg_t {width, delay}, both in cycles. The
// channel numbering below is also the register address of the channel in
// the SPI register file. The reset values are the settings the CSHINE
// collaboration used for 86Kr+208Pb at 25 MeV/u (delay/width tables of the
// original publication), divided by the 20 ns clock period; the per-channel
// gamma settings ahead of the OR are this design's own choice (0 ns / 80 ns).
package trigger_pkg;

  localparam int unsigned CLK_NS  = 20;   // 50 MHz board clock
  localparam int unsigned N_GAMMA = 16;   // gamma hodoscope timing inputs

  typedef struct packed {
    logic [7:0] width;   // output pulse length, cycles (0 = channel off)
    logic [7:0] delay;   // edge-to-output latency, cycles (0 and 1 both = 1)
  } gdg_cfg_t;

  // GDG channel map (30 channels; the module offers 32 interfaces)
  localparam int unsigned G_GAMMA0    = 0;   // 0..15: per-crystal, before OR_REDUCE
  localparam int unsigned G_GAMMA_M1  = 16;
  localparam int unsigned G_SSD_M1    = 17;
  localparam int unsigned G_SSD_M2    = 18;
  localparam int unsigned G_PPAC_T0   = 19;  // 19..21: PPAC1..3 T
  localparam int unsigned G_PPAC_M2   = 22;
  localparam int unsigned G_SYNC0     = 23;  // 23..28: synchronisation stage
  localparam int unsigned G_TRIGGER   = 29;
  localparam int unsigned N_GDG       = 30;

  // Trigger types, in the order of the synchronisation GDGs and mask bits
  typedef enum logic [2:0] {
    T_PPAC_M2      = 3'd0,  // fission
    T_SSD_M2       = 3'd1,  // two-body LCP
    T_PPAC_SSD     = 3'd2,  // fission & 1 LCP
    T_PPAC_GAMMA   = 3'd3,  // fission & 1 gamma
    T_SSD_GAMMA    = 3'd4,  // LCP & gamma
    T_ALL_OR       = 3'd5   // inclusive
  } trig_type_e;
  localparam int unsigned N_TRIG = 6;

  // Default enables: the five coincidence types; ALL_OR has its own output
  localparam logic [N_TRIG-1:0] TRIG_MASK_DEFAULT = 6'b01_1111;

  // Monitor points ("M" boxes)
  localparam int unsigned M_GAMMA_M1 = 0;
  localparam int unsigned M_SSD_M1   = 1;
  localparam int unsigned M_SSD_M2   = 2;
  localparam int unsigned M_PPAC_T0  = 3;   // 3..5
  localparam int unsigned M_SYNC0    = 6;   // 6..11, trig_type_e order
  localparam int unsigned M_TRIGGER  = 12;
  localparam int unsigned N_MON      = 13;

  function automatic gdg_cfg_t ns_cfg(int unsigned delay_ns, int unsigned width_ns);
    gdg_cfg_t c;
    c.delay = 8'(delay_ns / CLK_NS);
    c.width = 8'(width_ns / CLK_NS);
    return c;
  endfunction

  // Reset value of every GDG channel
  function automatic gdg_cfg_t gdg_default(int unsigned ch);
    if (ch < G_GAMMA_M1) return ns_cfg(0, 80);
    case (ch)
      G_GAMMA_M1:      return ns_cfg(20, 80);
      G_SSD_M1:        return ns_cfg(20, 80);
      G_SSD_M2:        return ns_cfg(20, 320);
      G_PPAC_T0,
      G_PPAC_T0 + 1,
      G_PPAC_T0 + 2:   return ns_cfg(20, 400);
      G_PPAC_M2:       return ns_cfg(0, 640);
      G_SYNC0 + 0:     return ns_cfg(200, 200);  // PPAC M2
      G_SYNC0 + 1:     return ns_cfg(200, 320);  // SSD M2
      G_SYNC0 + 2:     return ns_cfg(320, 320);  // PPAC M2 & SSD M1
      G_SYNC0 + 3:     return ns_cfg(0, 320);    // PPAC M2 & gamma M1
      G_SYNC0 + 4:     return ns_cfg(0, 320);    // SSD M1 & gamma M1
      G_SYNC0 + 5:     return ns_cfg(200, 400);  // ALL OR
      G_TRIGGER:       return ns_cfg(0, 400);
      default:         return ns_cfg(0, 0);
    endcase
  endfunction

endpackage

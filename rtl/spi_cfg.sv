// spi_cfg - SPI register file that configures the trigger remotely.
//
// The host sets the delay and width of every GDG channel, the trigger-type
// enables and the monitor selection over a serial port, and reads the
// monitor scalers back. All registers reset to the settings in trigger_pkg.
//
// SPI: mode 0 (SCLK idles low, both sides sample on the rising edge),
// MSB first, one 24-bit frame per chip-select period:
//   bit 23     1 = write, 0 = read
//   bits 22:16 register address
//   bits 15:0  write data (ignored on a read)
// On a read the slave shifts the register value out on MISO during the
// last 16 bits. A write takes effect when CS_N rises after exactly 24 bits;
// shorter or longer frames are dropped. SCLK, CS_N and MOSI are
// synchronised to clk, so SCLK must be at most clk/8 (6.25 MHz at 50 MHz).
//
// Register map (16-bit):
//   0x00-0x1D  GDG channel n: [15:8] width, [7:0] delay, in 20 ns cycles
//   0x20       [5:0] trigger-type enable mask
//   0x21       [3:0] monitor output select
//   0x22       write bit 0 = 1: clear all scalers (one-cycle pulse)
//   0x40+2i    scaler i, bits 15:0;  0x41+2i  scaler i, bits 31:16
// Unused addresses read 0.
//
// The source says only that the host program configures the GDG module
// through an SPI interface; frame, timing and register map are this
// design's own.
module spi_cfg
  import trigger_pkg::*;
#(
  parameter int unsigned N_SCAL = 13,
  parameter int unsigned CNT_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              spi_sclk,
  input  logic              spi_cs_n,
  input  logic              spi_mosi,
  output logic              spi_miso,
  output gdg_cfg_t          gdg_cfg [N_GDG],
  output logic [N_TRIG-1:0] trig_mask,
  output logic [3:0]        mon_sel,
  output logic              scaler_clear,
  input  logic [CNT_W-1:0]  scaler [N_SCAL]
);
  localparam logic [6:0] A_MASK  = 7'h20;
  localparam logic [6:0] A_MON   = 7'h21;
  localparam logic [6:0] A_CTRL  = 7'h22;
  localparam logic [6:0] A_SCAL0 = 7'h40;

  logic [2:0]  sclk_s, cs_s;
  logic [1:0]  mosi_s;
  logic        sclk_rise, cs_rise, cs_act;
  logic [23:0] rx;
  logic [4:0]  nbits;
  logic [15:0] tx;
  logic [15:0] rd_data;
  logic [6:0]  rd_addr;
  logic [6:0]  scal_off;
  logic [3:0]  scal_idx;
  logic [CNT_W-1:0] scal_v;
  logic [4:0]  wr_ch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0;
      cs_s   <= '1;
      mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], spi_sclk};
      cs_s   <= {cs_s[1:0], spi_cs_n};
      mosi_s <= {mosi_s[0], spi_mosi};
    end
  end

  assign sclk_rise = sclk_s[1] & ~sclk_s[2];
  assign cs_rise   = cs_s[1] & ~cs_s[2];
  assign cs_act    = ~cs_s[1];

  // Read mux: address = the 7 bits after the R/W bit, available after 8 bits
  assign rd_addr = {rx[5:0], mosi_s[1]};
  assign scal_off = rd_addr - A_SCAL0;
  assign scal_idx = (32'(scal_off[6:1]) < N_SCAL) ? scal_off[4:1] : '0;
  assign wr_ch    = rx[20:16];

  always_comb begin
    rd_data = '0;
    scal_v  = scaler[scal_idx];
    if (32'(rd_addr) < N_GDG)      rd_data = gdg_cfg[rd_addr[4:0]];
    else if (rd_addr == A_MASK)    rd_data = 16'(trig_mask);
    else if (rd_addr == A_MON)     rd_data = 16'(mon_sel);
    else if (rd_addr >= A_SCAL0 && 32'(rd_addr - A_SCAL0) < 2 * N_SCAL) begin
      rd_data = rd_addr[0] ? 16'(scal_v >> 16) : scal_v[15:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx           <= '0;
      nbits        <= '0;
      tx           <= '0;
      trig_mask    <= TRIG_MASK_DEFAULT;
      mon_sel      <= 4'(M_TRIGGER);
      scaler_clear <= 1'b0;
      for (int i = 0; i < N_GDG; i++) gdg_cfg[i] <= gdg_default(i);
    end else begin
      scaler_clear <= 1'b0;
      if (!cs_act) begin
        nbits <= '0;
        if (cs_rise && nbits == 5'd24 && rx[23]) begin
          if (32'(rx[22:16]) < N_GDG)   gdg_cfg[wr_ch] <= rx[15:0];
          else if (rx[22:16] == A_MASK) trig_mask <= rx[N_TRIG-1:0];
          else if (rx[22:16] == A_MON)  mon_sel <= rx[3:0];
          else if (rx[22:16] == A_CTRL) scaler_clear <= rx[0];
        end
      end else if (sclk_rise) begin
        rx <= {rx[22:0], mosi_s[1]};
        if (nbits != 5'd31) nbits <= nbits + 1'b1;
        if (nbits == 5'd7)  tx <= rd_data;       // 8th bit: address complete
        else                tx <= {tx[14:0], 1'b0};
      end
    end
  end

  assign spi_miso = tx[15];

  // A frame must be 24 bits long to write anything
  property p_frame_len;
    @(posedge clk) disable iff (!rst_n) (cs_rise && nbits != 5'd0) |-> (nbits == 5'd24);
  endproperty
  a_frame_len: assert property (p_frame_len)
    else $warning("spi_cfg: frame of %0d bits ignored", nbits);
endmodule

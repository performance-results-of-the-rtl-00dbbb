// spi_config: SPI slave and configuration registers of the chip.
//
// The chip is configured over SPI: per-channel registers (PCR: thresholds and
// PCR_CAL_MODE, which selects the internal test pulse), global registers
// (GCR: preamplifier gain GCR_GAIN_CTR, GCR_DC_COUPLING, ADC resolution,
// memory segmentation) and bias/DAC controls (CTR_TP_VB, CTR_MIR_VB,
// CTR_LO_VTH_GBL, CTR_HI_VTH_GBL, VTH_LSB, test-pulse length). These register
// names come from the paper; the frame format and the address map below are
// choices of this design.
//
// Frame: 24 bits, MSB first, SPI mode 0 (sample mosi on the rising sclk,
// change miso on the falling one), framed by csn low.
//   bit 23     1 = write, 0 = read
//   bits 22:16 address
//   bits 15:0  write data; on a read, the register is shifted out on miso
//              during these 16 bits
// Address map:
//   0x00..0x3F PCR of channel n: [10] cal_mode, [9:5] vth_lo, [4:0] vth_hi
//   0x40 GCR: [10:7] adc_bits, [6:5] segmentation, [4] dc_coupling, [3:0] gain
//   0x41 CTR_TP_VB  0x42 CTR_MIR_VB  0x43 CTR_LO_VTH_GBL  0x44 CTR_HI_VTH_GBL
//   0x45 VTH_LSB    0x46 TP length   0x47 validation window
//   0x48 FPGA time-out               0x49 chip id
// Reset values: the acquisition settings listed in mizar_pkg::cfg_default.
//
// The SPI pins are sampled by the 200 MHz system clock through two-flop
// synchronizers, so sclk must stay below clk/4. A write takes effect three
// clock cycles after the last rising sclk edge.
module spi_config
  import mizar_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sclk,
  input  logic       csn,
  input  logic       mosi,
  output logic       miso,
  output mizar_cfg_t cfg
);

  logic [2:0]  sclk_s, csn_s;
  logic [1:0]  mosi_s;
  logic [4:0]  bitcnt;
  logic [23:0] sh;
  logic [15:0] rd_sh;
  logic        sclk_rise, sclk_fall, active;

  assign sclk_rise = sclk_s[1] & ~sclk_s[2];
  assign sclk_fall = ~sclk_s[1] & sclk_s[2];
  assign active    = ~csn_s[1];

  function automatic logic [15:0] read_reg(mizar_cfg_t c, logic [6:0] a);
    logic [15:0] d;
    d = '0;
    if (a < 7'(NCH)) begin
      d[4:0]  = c.vth_hi[a[5:0]];
      d[9:5]  = c.vth_lo[a[5:0]];
      d[10]   = c.cal_mode[a[5:0]];
    end else begin
      case (a)
        7'h40: d = {5'b0, c.adc_bits, 2'(c.seg), c.dc_coupling, c.gain};
        7'h41: d = {8'b0, c.tp_vb};
        7'h42: d = {12'b0, c.mir_vb};
        7'h43: d = {6'b0, c.lo_vth_gbl};
        7'h44: d = {6'b0, c.hi_vth_gbl};
        7'h45: d = {12'b0, c.vth_lsb};
        7'h46: d = {8'b0, c.tp_len};
        7'h47: d = {8'b0, c.win_len};
        7'h48: d = {8'b0, c.fpga_tmo};
        7'h49: d = {8'b0, c.chip_id};
        default: d = '0;
      endcase
    end
    return d;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0;
      csn_s  <= '1;
      mosi_s <= '0;
      bitcnt <= '0;
      sh     <= '0;
      rd_sh  <= '0;
      miso   <= 1'b0;
      cfg    <= cfg_default();
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      csn_s  <= {csn_s[1:0], csn};
      mosi_s <= {mosi_s[0], mosi};
      if (!active) begin
        bitcnt <= '0;
        miso   <= 1'b0;
      end else begin
        if (sclk_rise) begin
          sh     <= {sh[22:0], mosi_s[1]};
          bitcnt <= bitcnt + 1'b1;
          if (bitcnt == 5'd7) begin
            // address complete: {sh[6:0], bit} is rw+addr; load read data
            rd_sh <= read_reg(cfg, {sh[5:0], mosi_s[1]});
          end
          if (bitcnt == 5'd23 && sh[22]) begin
            logic [6:0]  a;
            logic [15:0] d;
            a = sh[21:15];
            d = {sh[14:0], mosi_s[1]};
            if (a < 7'(NCH)) begin
              cfg.vth_hi[a[5:0]]   <= d[4:0];
              cfg.vth_lo[a[5:0]]   <= d[9:5];
              cfg.cal_mode[a[5:0]] <= d[10];
            end else begin
              case (a)
                7'h40: begin
                  cfg.gain        <= d[3:0];
                  cfg.dc_coupling <= d[4];
                  cfg.seg         <= seg_mode_e'(d[6:5]);
                  cfg.adc_bits    <= d[10:7];
                end
                7'h41: cfg.tp_vb      <= d[7:0];
                7'h42: cfg.mir_vb     <= d[3:0];
                7'h43: cfg.lo_vth_gbl <= d[9:0];
                7'h44: cfg.hi_vth_gbl <= d[9:0];
                7'h45: cfg.vth_lsb    <= d[3:0];
                7'h46: cfg.tp_len     <= d[7:0];
                7'h47: cfg.win_len    <= d[7:0];
                7'h48: cfg.fpga_tmo   <= d[7:0];
                7'h49: cfg.chip_id    <= d[7:0];
                default: ;
              endcase
            end
          end
        end
        if (sclk_fall && bitcnt >= 5'd8 && bitcnt <= 5'd23) begin
          miso  <= rd_sh[15];
          rd_sh <= {rd_sh[14:0], 1'b0};
        end
      end
    end
  end

endmodule

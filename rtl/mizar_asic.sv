// mizar_asic: the 64-channel waveform-sampling readout chip.
//
// Each channel has an analog front end with two discriminators (modelled by
// analog_channel), its trigger logic (channel_trigger) and a column of 256
// memory cells whose codes sit in a cell_latch_bank. Shared by all channels
// are the event controller (trigger_ctrl), the memory write control and
// derandomizer (buffer_manager), eight conversion chains (wilkinson_counter),
// the configuration registers (spi_config) and the end-of-column serializer
// (eoc_serializer).
//
// Flow of one event: a channel's low discriminator fires (t_S); the memory
// block being written is frozen half a block later; once every channel's
// validation window has closed the hitmaps go to the FPGA; on accept the
// block is converted (2^N cycles) and queued; the serializer then sends 64
// frames at two bits per 400 MHz cycle. Reject or no answer in time frees the
// block. With every block busy only the hitmap goes out.
//
// Clocks: clk is the 200 MHz sampling/system clock, clk_ser the 400 MHz
// serializer clock. The serializer reads the latch banks of a frozen block
// across the two domains; only its request/acknowledge pair is synchronized.
// Pads, LVDS drivers and supplies are not modelled.
module mizar_asic
  import mizar_pkg::*;
(
  input  logic                     clk,
  input  logic                     clk_ser,
  input  logic                     rst_n,
  // SPI configuration
  input  logic                     sclk,
  input  logic                     csn,
  input  logic                     mosi,
  output logic                     miso,
  // SiPM inputs, mV above baseline per sample, and test-pulse strobe
  input  logic signed [15:0]       v_in_mv [NCH],
  input  logic                     tp_fire,
  // hitmap link to the FPGA
  output logic                     hm_valid,
  output logic [NCH-1:0]           hm_hi,
  output logic [NCH-1:0]           hm_lo,
  output logic                     hm_data,
  input  logic                     fpga_accept,
  input  logic                     fpga_reject,
  // data link
  output logic [1:0]               ser_d,
  output logic                     ser_valid,
  // status
  output logic                     mem_full,
  output logic                     evt_timeout,
  output logic [NBLK-1:0]          blk_busy,
  output logic [NBLK-1:0]          conv_busy
);

  mizar_cfg_t cfg;

  logic [NCH-1:0] disc_hi, disc_lo, xing, pending, hit_hi, hit_lo;
  logic           clear, ts_strobe, evt_accept, evt_release, data_ok, busy;
  logic           wr_en;
  logic [CELL_AW-1:0] wr_addr;
  logic [NBLK-1:0] conv_start, conv_done, conv_on, conv_last;
  logic [NBLK-1:0][ADC_MAX_BITS-1:0] cnt;
  logic           ro_req, ro_ack;
  ro_info_t       ro_info;
  logic [CH_AW-1:0]   rd_ch;
  logic [CELL_AW-1:0] rd_cell;
  logic [ADC_MAX_BITS-1:0] rd_data_ch [NCH];
  logic [NCELLS-1:0] comp [NCH];
  int             v_fe_mv [NCH];

  spi_config u_spi (
    .clk, .rst_n, .sclk, .csn, .mosi, .miso, .cfg
  );

  for (genvar i = 0; i < NCH; i++) begin : g_ch
    analog_channel u_afe (
      .clk, .rst_n,
      .v_in_mv    (v_in_mv[i]),
      .tp_fire,
      .cal_mode   (cfg.cal_mode[i]),
      .gain       (cfg.gain),
      .tp_vb      (cfg.tp_vb),
      .tp_len     (cfg.tp_len),
      .vth_hi     (cfg.vth_hi[i]),
      .vth_lo     (cfg.vth_lo[i]),
      .hi_vth_gbl (cfg.hi_vth_gbl),
      .lo_vth_gbl (cfg.lo_vth_gbl),
      .vth_lsb    (cfg.vth_lsb),
      .mir_vb     (cfg.mir_vb),
      .seg        (cfg.seg),
      .wr_en, .wr_addr,
      .cnt, .conv_on,
      .disc_hi    (disc_hi[i]),
      .disc_lo    (disc_lo[i]),
      .comp       (comp[i]),
      .v_fe_mv    (v_fe_mv[i])
    );

    channel_trigger u_trig (
      .clk, .rst_n,
      .disc_lo (disc_lo[i]),
      .disc_hi (disc_hi[i]),
      .win_len (cfg.win_len),
      .clear,
      .xing   (xing[i]),
      .pending (pending[i]),
      .hit_hi  (hit_hi[i]),
      .hit_lo  (hit_lo[i])
    );

    cell_latch_bank u_lat (
      .clk, .rst_n,
      .seg        (cfg.seg),
      .comp       (comp[i]),
      .cnt, .conv_on, .conv_last, .conv_start,
      .rd_cell,
      .rd_data    (rd_data_ch[i])
    );
  end

  trigger_ctrl u_tctl (
    .clk, .rst_n,
    .xing, .pending, .hit_hi, .hit_lo,
    .fpga_tmo    (cfg.fpga_tmo),
    .data_ok,
    .fpga_accept, .fpga_reject,
    .ts_strobe, .hm_valid, .hm_hi, .hm_lo, .hm_data,
    .evt_accept, .evt_release, .evt_timeout,
    .clear, .busy
  );

  buffer_manager u_buf (
    .clk, .rst_n,
    .seg        (cfg.seg),
    .adc_bits   (cfg.adc_bits),
    .ts_strobe, .evt_accept, .evt_release,
    .evt_hit_hi (hm_hi),
    .data_ok, .wr_en, .wr_addr,
    .conv_start, .conv_done,
    .ro_req, .ro_info, .ro_ack,
    .mem_full, .blk_busy
  );

  for (genvar b = 0; b < NBLK; b++) begin : g_conv
    wilkinson_counter u_cnt (
      .clk, .rst_n,
      .start    (conv_start[b]),
      .adc_bits (cfg.adc_bits),
      .count    (cnt[b]),
      .ramp_en  (conv_on[b]),
      .last     (conv_last[b]),
      .done     (conv_done[b])
    );
  end
  assign conv_busy = conv_on;

  eoc_serializer u_ser (
    .clk_ser, .rst_n,
    .ro_req, .ro_info,
    .chip_id (cfg.chip_id),
    .rd_ch, .rd_cell,
    .rd_data (rd_data_ch[rd_ch]),
    .ser_d, .ser_valid, .ro_ack
  );

endmodule

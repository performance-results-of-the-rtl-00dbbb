// mizar_pkg: constants, types and helpers shared by the MIZAR readout design.
//
// The chip reads an 8x8 SiPM matrix: 64 channels, each with 256 analog memory
// cells sampled at 200 MHz and a Wilkinson ADC of 8 to 12 bits per cell. The
// 256 cells can be used as one block or split into 4 blocks of 64 or 8 blocks
// of 32 cells; each block has its own conversion chain. Channel numbering is
// row-major on the matrix (channel = 8*row + col, 0 top-left, 63 bottom-right).
//
// The configuration struct gathers every programmable setting. Its reset
// values are the acquisition settings of the first test campaign (thresholds
// 15, ramp current 320 nA, threshold levels 900 mV with 1 mV steps, DC
// coupling, 20 ns test pulse). The register map, the frame header layout and
// the validation-window reset value are choices of this design.
package mizar_pkg;

  localparam int NCH          = 64;   // channels (8x8 matrix)
  localparam int ROWS         = 8;
  localparam int COLS         = 8;
  localparam int NCELLS       = 256;  // analog memory cells per channel
  localparam int NBLK         = 8;    // most blocks (8 x 32 cells)
  localparam int ADC_MAX_BITS = 12;   // Wilkinson ADC resolution, 8..12
  localparam int HDR_BITS     = 48;   // frame header per channel
  localparam int TRL_BITS     = 2;    // frame trailer (386 - 32*12)
  localparam int CELL_AW      = $clog2(NCELLS);
  localparam int BLK_AW       = $clog2(NBLK);
  localparam int CH_AW        = $clog2(NCH);

  // Memory segmentation: block size in cells.
  typedef enum logic [1:0] {
    SEG_32  = 2'd0,
    SEG_64  = 2'd1,
    SEG_256 = 2'd2
  } seg_mode_e;

  // Life of one memory block.
  typedef enum logic [2:0] {
    BLK_FREE,      // may be given to the sampler
    BLK_SAMPLING,  // being written every clock
    BLK_POST,      // t_S seen: writing the second half of the window
    BLK_HELD,      // frozen, waiting for the FPGA decision
    BLK_CONV,      // Wilkinson conversion running
    BLK_READQ,     // converted, waiting for the serializer
    BLK_READ       // being serialized
  } blk_state_e;

  typedef struct packed {
    logic [NCH-1:0][4:0] vth_hi;      // per-channel high threshold code n
    logic [NCH-1:0][4:0] vth_lo;      // per-channel low threshold code n
    logic [NCH-1:0]      cal_mode;    // PCR_CAL_MODE: test pulse instead of SiPM
    logic [3:0]          gain;        // GCR_GAIN_CTR
    logic                dc_coupling; // GCR_DC_COUPLING
    seg_mode_e           seg;         // memory segmentation
    logic [3:0]          adc_bits;    // ADC resolution, 8..12
    logic [7:0]          tp_vb;       // CTR_TP_VB, test pulse amplitude
    logic [3:0]          mir_vb;      // CTR_MIR_VB, ramp current (k+1)*40 nA
    logic [9:0]          lo_vth_gbl;  // CTR_LO_VTH_GBL, mV
    logic [9:0]          hi_vth_gbl;  // CTR_HI_VTH_GBL, mV
    logic [3:0]          vth_lsb;     // VTH_LSB, mV
    logic [7:0]          tp_len;      // TP sequence, samples
    logic [7:0]          win_len;     // validation window, samples
    logic [7:0]          fpga_tmo;    // FPGA answer time-out, samples
    logic [7:0]          chip_id;
  } mizar_cfg_t;

  // Description of one converted block handed to the serializer.
  typedef struct packed {
    logic [BLK_AW-1:0]  blk;
    logic [CELL_AW-1:0] first_cell;   // oldest sample of the window
    logic [CELL_AW-1:0] ts_cell;      // cell written at t_S
    logic [15:0]        evt_id;
    logic [NCH-1:0]     hit_hi;       // channels that sent a high trigger
    seg_mode_e          seg;
    logic [3:0]         adc_bits;
  } ro_info_t;

  function automatic int unsigned blk_cells(seg_mode_e s);
    case (s)
      SEG_32:  return 32;
      SEG_64:  return 64;
      default: return 256;
    endcase
  endfunction

  function automatic int unsigned n_blocks(seg_mode_e s);
    return NCELLS / blk_cells(s);
  endfunction

  // Block that holds a given cell.
  function automatic logic [BLK_AW-1:0] cell_block(seg_mode_e s, logic [CELL_AW-1:0] c);
    case (s)
      SEG_32:  return BLK_AW'(c[CELL_AW-1:5]);
      SEG_64:  return BLK_AW'(c[CELL_AW-1:6]);
      default: return '0;
    endcase
  endfunction

  function automatic logic [3:0] clamp_bits(logic [3:0] b);
    if (b < 4'd8)  return 4'd8;
    if (b > 4'd12) return 4'd12;
    return b;
  endfunction

  // Frame length in bits for one channel.
  function automatic int unsigned frame_bits(seg_mode_e s, logic [3:0] b);
    return HDR_BITS + blk_cells(s) * int'(clamp_bits(b)) + TRL_BITS;
  endfunction

  function automatic mizar_cfg_t cfg_default();
    mizar_cfg_t c;
    c.vth_hi      = {NCH{5'd15}};
    c.vth_lo      = {NCH{5'd15}};
    c.cal_mode    = '0;
    c.gain        = 4'd8;
    c.dc_coupling = 1'b1;
    c.seg         = SEG_32;
    c.adc_bits    = 4'd12;
    c.tp_vb       = 8'd250;
    c.mir_vb      = 4'd7;      // 320 nA
    c.lo_vth_gbl  = 10'd900;
    c.hi_vth_gbl  = 10'd900;
    c.vth_lsb     = 4'd1;
    c.tp_len      = 8'd4;      // 20 ns
    c.win_len     = 8'd4;
    c.fpga_tmo    = 8'd16;     // 80 ns
    c.chip_id     = 8'd1;
    return c;
  endfunction

endpackage

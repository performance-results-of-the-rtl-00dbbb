// analog_channel: BEHAVIOURAL MODEL of the analog part of one channel. It is
// not circuitry for synthesis; it stands for the front end, the threshold
// DACs and discriminators, the 256 sampling capacitors and the per-cell
// comparators, with the ports the digital logic sees, so that the digital
// design can be simulated end to end. Voltages are integers (mV, uV).
//
// Front end: the input is the SiPM signal above baseline in mV, one value per
// 200 MHz sample (v_in_mv). In calibration mode (PCR_CAL_MODE) it is replaced
// by an internal test pulse of tp_vb mV lasting tp_len samples, started by
// tp_fire. The FE output is v_fe = FE_BASE_MV + signal * (gain+1)/8.
//
// Discriminators: threshold = VTH_GBL - (31 - n) * VTH_LSB, so n = 31 is the
// global level and n = 0 is 31 steps below it; a discriminator is high while
// v_fe is above its threshold.
//
// Memory cell (Fig. 1 of the chip description: switch S0 from V_FE to the
// capacitor, bottom plate switched between V_REF_BOTTOM and the ramp,
// comparator against V_BL): when wr_en is high at a clock edge the cell
// wr_addr stores v_fe. During conversion of the cell's block, comp goes high
// once the ramp, cnt * step above V_REF_BOTTOM, reaches the stored voltage;
// step = (mir_vb + 1) * RAMP_UV_PER_40NA uV per count, as the ramp current
// CTR_MIR_VB runs from 40 nA to 640 nA in 40 nA steps. The code therefore
// grows with the sampled voltage.
//
// What comes from the paper: the register names, the threshold relation, the
// 40 nA current steps, the 4-bit gain, the test-pulse controls, the cell
// structure. Everything numeric beyond that (baseline, reference, gain curve,
// volts per count, test pulse in mV) is a choice of this model.
module analog_channel
  import mizar_pkg::*;
#(
  parameter int FE_BASE_MV       = 870,
  parameter int VREF_BOTTOM_MV   = 600,
  parameter int RAMP_UV_PER_40NA = 37
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic signed [15:0]                v_in_mv,
  input  logic                              tp_fire,
  input  logic                              cal_mode,
  input  logic [3:0]                        gain,
  input  logic [7:0]                        tp_vb,
  input  logic [7:0]                        tp_len,
  input  logic [4:0]                        vth_hi,
  input  logic [4:0]                        vth_lo,
  input  logic [9:0]                        hi_vth_gbl,
  input  logic [9:0]                        lo_vth_gbl,
  input  logic [3:0]                        vth_lsb,
  input  logic [3:0]                        mir_vb,
  input  seg_mode_e                         seg,
  input  logic                              wr_en,
  input  logic [CELL_AW-1:0]                wr_addr,
  input  logic [NBLK-1:0][ADC_MAX_BITS-1:0] cnt,
  input  logic [NBLK-1:0]                   conv_on,
  output logic                              disc_hi,
  output logic                              disc_lo,
  output logic [NCELLS-1:0]                 comp,
  output int                                v_fe_mv
);

  int          cell_uv [NCELLS];
  logic [7:0]  tp_left;
  int          sig_mv;
  int          th_hi_mv, th_lo_mv;
  int          step_uv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tp_left <= '0;
    else if (tp_fire) tp_left <= tp_len;
    else if (tp_left != 0) tp_left <= tp_left - 1'b1;
  end

  always_comb begin
    if (cal_mode) sig_mv = (tp_left != 0) ? int'(tp_vb) : 0;
    else          sig_mv = int'(v_in_mv);
    v_fe_mv  = FE_BASE_MV + (sig_mv * (int'(gain) + 1)) / 8;
    th_hi_mv = int'(hi_vth_gbl) - (31 - int'(vth_hi)) * int'(vth_lsb);
    th_lo_mv = int'(lo_vth_gbl) - (31 - int'(vth_lo)) * int'(vth_lsb);
    disc_hi  = v_fe_mv > th_hi_mv;
    disc_lo  = v_fe_mv > th_lo_mv;
    step_uv  = (int'(mir_vb) + 1) * RAMP_UV_PER_40NA;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCELLS; c++) cell_uv[c] <= VREF_BOTTOM_MV * 1000;
    end else if (wr_en) begin
      cell_uv[wr_addr] <= v_fe_mv * 1000;
    end
  end

  always_comb begin
    for (int c = 0; c < NCELLS; c++) begin
      int b;
      b = int'(cell_block(seg, CELL_AW'(c)));
      comp[c] = conv_on[b] &&
                (int'(cnt[b]) * step_uv >= cell_uv[c] - VREF_BOTTOM_MV * 1000);
    end
  end

endmodule

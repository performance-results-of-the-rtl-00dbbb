// mizar_fee: top level of the front-end electronics, one MIZAR ASIC with the
// FPGA trigger logic that validates its hitmaps.
//
// The ASIC (mizar_asic) samples 64 SiPM channels into analog memory and sends
// a high and a low hitmap for every event; the validator (hitmap_validator)
// answers accept or reject one cycle later by spatial pattern matching; the
// ASIC converts and serializes accepted events and frees the rest. The
// validator's hold input withholds its answer so that the ASIC's 80 ns
// time-out can act, and force_accept reproduces the lab mode in which every
// event is read out. The flight system lets one FPGA serve five ASICs and
// look at neighbouring ASICs for single edge pixels; here one ASIC is served
// and the edge case is reported on edge_query.
//
// Clocks: clk 200 MHz (sampling, trigger, conversion), clk_ser 400 MHz (DDR
// serializer). Active-low asynchronous reset rst_n.
module mizar_fee
  import mizar_pkg::*;
(
  input  logic                 clk,
  input  logic                 clk_ser,
  input  logic                 rst_n,
  input  logic                 sclk,
  input  logic                 csn,
  input  logic                 mosi,
  output logic                 miso,
  input  logic signed [15:0]   v_in_mv [NCH],
  input  logic                 tp_fire,
  input  logic                 fpga_hold,
  input  logic                 force_accept,
  output logic [1:0]           ser_d,
  output logic                 ser_valid,
  output logic                 hm_valid,
  output logic [NCH-1:0]       hm_hi,
  output logic [NCH-1:0]       hm_lo,
  output logic                 hm_data,
  output logic                 accept,
  output logic                 reject,
  output logic [9:0]           case_hit,
  output logic                 edge_query,
  output logic                 mem_full,
  output logic                 evt_timeout,
  output logic [NBLK-1:0]      blk_busy,
  output logic [NBLK-1:0]      conv_busy
);

  mizar_asic u_asic (
    .clk, .clk_ser, .rst_n,
    .sclk, .csn, .mosi, .miso,
    .v_in_mv, .tp_fire,
    .hm_valid, .hm_hi, .hm_lo, .hm_data,
    .fpga_accept (accept),
    .fpga_reject (reject),
    .ser_d, .ser_valid,
    .mem_full, .evt_timeout, .blk_busy, .conv_busy
  );

  hitmap_validator u_val (
    .clk, .rst_n,
    .hm_valid, .hm_hi, .hm_lo,
    .hold (fpga_hold),
    .force_accept,
    .accept, .reject, .case_hit, .edge_query
  );

endmodule

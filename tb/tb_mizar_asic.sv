// tb_mizar_asic: end-to-end test of the readout chip with the testbench as
// the SiPM matrix and as the FPGA.
//
// The chip is configured over SPI (unity gain, low level 900 mV, high level
// 1000 mV, chip id 0x3C). Pulses of a fixed shape are injected on chosen
// channels; the testbench predicts which channels give a high and which a low
// trigger, checks the hitmaps, and answers as the FPGA. For an accepted event
// it measures the conversion time (2^N cycles) and the readout length, decodes
// all 64 frames and compares every sample with the code worked out from the
// injected waveform: the sample written k cycles after t_S is the input two
// clocks after the first threshold crossing (one clock for the channel
// trigger, one for the event controller), and its code is
// ceil((V - V_REF_BOTTOM) / step), clipped to full scale. Also covered: a
// rejected event (no data, block freed) and an unanswered one (time-out 16
// cycles after the hitmap), and an 8-bit, 64-cell configuration.
module tb_mizar_asic;
  import mizar_pkg::*;
  logic               clk = 1'b0, clk_ser = 1'b0, rst_n = 1'b0;
  logic               sclk = 1'b0, csn = 1'b1, mosi = 1'b0, miso;
  logic signed [15:0] v_in_mv [NCH];
  logic               tp_fire = 1'b0;
  logic               hm_valid, hm_data;
  logic [NCH-1:0]     hm_hi, hm_lo;
  logic               fpga_accept = 1'b0, fpga_reject = 1'b0;
  logic [1:0]         ser_d;
  logic               ser_valid, mem_full, evt_timeout;
  logic [NBLK-1:0]    blk_busy, conv_busy;
  int                 checks = 0, failures = 0;

  always #2.5  clk = ~clk;
  always #1.25 clk_ser = ~clk_ser;

  mizar_asic dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  task automatic tick(int n = 1);
    repeat (n) @(negedge clk);
  endtask

  // ---- SPI master (mode 0, sclk = clk / 16) --------------------------------
  task automatic spi_wr(input logic [6:0] addr, input logic [15:0] data);
    logic [23:0] f;
    f = {1'b1, addr, data};
    csn = 1'b0; tick(8);
    for (int i = 23; i >= 0; i--) begin
      mosi = f[i]; tick(8); sclk = 1'b1; tick(8); sclk = 1'b0;
    end
    tick(8); csn = 1'b1; tick(16);
  endtask

  // ---- SiPM pulses --------------------------------------------------------
  // shape in percent of the amplitude, one value per 5 ns sample
  localparam int SHAPE [20] = '{30, 70, 100, 80, 64, 51, 41, 33, 26, 21,
                                17, 13, 11, 9, 7, 5, 4, 3, 2, 1};
  int amp [NCH];
  int t0, cyc;

  function automatic int pulse(int ch, int p);
    int d;
    d = p - t0;
    if (d < 0 || d >= 20) return 0;
    return amp[ch] * SHAPE[d] / 100;
  endfunction

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk)
    for (int ch = 0; ch < NCH; ch++) v_in_mv[ch] <= 16'(pulse(ch, cyc + 1));

  // ---- serial stream capture ---------------------------------------------
  bit bits [$];
  int valid_cycles;
  always @(posedge clk_ser)
    if (ser_valid && rst_n) begin
      bits.push_back(ser_d[1]); bits.push_back(ser_d[0]); valid_cycles++;
    end

  function automatic int take(inout int pos, input int n);
    int v;
    v = 0;
    for (int i = 0; i < n; i++) begin v = (v << 1) | int'(bits[pos]); pos++; end
    return v;
  endfunction

  // model settings
  int lo_th_mv, hi_th_mv, nbits, ncell, mir;

  function automatic int code_of(int mv);
    int step, c, top;
    step = (mir + 1) * 37;
    top = (1 << nbits) - 1;
    c = ((870 + mv - 600) * 1000 + step - 1) / step;
    if (c < 0) c = 0;
    if (c > top) c = top;
    return c;
  endfunction

  // first sample index at which a channel exceeds a level, -1 if never
  function automatic int first_over(int ch, int th);
    for (int d = 0; d < 20; d++)
      if (amp[ch] * SHAPE[d] / 100 > th) return d;
    return -1;
  endfunction

  // Inject one event; wait for the hitmap; compare it with the prediction.
  task automatic inject(output int p_cross);
    logic [NCH-1:0] exp_hi, exp_lo;
    int n, dmin;
    exp_hi = '0; exp_lo = '0; dmin = 99;
    for (int ch = 0; ch < NCH; ch++) begin
      int dl, dh;
      dl = first_over(ch, lo_th_mv);
      dh = first_over(ch, hi_th_mv);
      if (dl >= 0 && dl < dmin) dmin = dl;
      if (dh >= 0 && (dh - dl) <= 4) exp_hi[ch] = 1'b1;
      else if (dl >= 0) exp_lo[ch] = 1'b1;
    end
    t0 = cyc + 4;
    p_cross = t0 + dmin;
    n = 0;
    while (!hm_valid && n < 200) begin tick(); n++; end
    check(hm_valid, "hitmap sent");
    check(hm_hi == exp_hi && hm_lo == exp_lo,
          $sformatf("hitmaps hi %h (exp %h) lo %h (exp %h)", hm_hi, exp_hi, hm_lo, exp_lo));
  endtask

  task automatic expect_readout(int p_cross, int evt, int blk);
    int n, pos, bad_hdr, bad_smp, bad_trl, bad_ch, pts, conv_n, exp_cycles, tsc;
    // conversion time
    n = 0;
    while (conv_busy == '0 && n < 100) begin tick(); n++; end
    check(conv_busy[blk], $sformatf("conversion chain %0d runs", blk));
    conv_n = 0;
    while (conv_busy[blk] && conv_n < 10000) begin tick(); conv_n++; end
    check(conv_n == (1 << nbits), $sformatf("conversion %0d cycles, expected %0d", conv_n, 1 << nbits));
    // readout
    n = 0;
    while (!ser_valid && n < 1000) begin tick(); n++; end
    n = 0;
    while (ser_valid && n < 200000) begin tick(); n++; end
    tick(10);
    exp_cycles = NCH * int'(frame_bits(ncell == 32 ? SEG_32 : ncell == 64 ? SEG_64 : SEG_256, 4'(nbits))) / 2;
    check(valid_cycles == exp_cycles,
          $sformatf("readout %0d cycles at 400 MHz, expected %0d", valid_cycles, exp_cycles));
    pts = p_cross + 2;
    pos = 0; bad_hdr = 0; bad_smp = 0; bad_trl = 0;
    tsc = -1;
    for (int ch = 0; ch < NCH && pos + 48 <= bits.size(); ch++) begin
      int par, v, t;
      if (take(pos, 8) != 'h3C) bad_hdr++;
      if (take(pos, 6) != ch) bad_hdr++;
      if (take(pos, 16) != evt) bad_hdr++;
      if (take(pos, 3) != blk) bad_hdr++;
      t = take(pos, 8);
      if (tsc < 0) tsc = t; else if (t != tsc) bad_hdr++;
      if (t / ncell != blk) bad_hdr++;
      void'(take(pos, 2));
      if (take(pos, 4) != nbits) bad_hdr++;
      void'(take(pos, 1));
      par = 0;
      bad_ch = bad_smp;
      for (int k = 0; k < ncell; k++) begin
        v = take(pos, nbits);
        if (v != code_of(pulse(ch, pts - ncell / 2 + k))) begin
          if (bad_smp < 4)
            $display("  ch %0d sample %0d: %0d, expected %0d", ch, k, v,
                     code_of(pulse(ch, pts - ncell / 2 + k)));
          bad_smp++;
        end
        par ^= $countones(v) & 1;
      end
      check(bad_smp == bad_ch, $sformatf("channel %0d: %0d wrong samples", ch, bad_smp - bad_ch));
      if (take(pos, 1) != par) bad_trl++;
      if (take(pos, 1) != 1) bad_trl++;
    end
    check(bad_hdr == 0, $sformatf("frame headers: %0d wrong fields", bad_hdr));
    check(bad_smp == 0, $sformatf("samples: %0d wrong", bad_smp));
    check(bad_trl == 0, $sformatf("trailers: %0d wrong", bad_trl));
    n = 0;
    while (blk_busy[blk] && n < 100) begin tick(); n++; end
    check(!blk_busy[blk], "block freed after the readout");
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pc, n, blk;
    cyc = 0; t0 = -100;
    for (int ch = 0; ch < NCH; ch++) begin amp[ch] = 0; v_in_mv[ch] = '0; end
    tick(3); rst_n = 1'b1; tick(3);

    // configuration: unity gain, 12 bits, 32-cell blocks
    spi_wr(7'h40, 16'({4'd12, 2'(SEG_32), 1'b1, 4'd7}));
    spi_wr(7'h44, 16'd1000);
    spi_wr(7'h49, 16'h3C);
    lo_th_mv = 900 - 16 - 870; hi_th_mv = 1000 - 16 - 870;
    nbits = 12; ncell = 32; mir = 7;
    tick(100);

    // event 1: accepted; a high channel, two low channels
    amp[27] = 300; amp[28] = 60; amp[35] = 40; amp[0] = 10;
    bits.delete(); valid_cycles = 0;
    inject(pc);
    blk = 0;
    check(hm_data, "event 1 has a memory block");
    tick(3); fpga_accept = 1'b1; tick(); fpga_accept = 1'b0;
    expect_readout(pc, 0, blk);
    for (int ch = 0; ch < NCH; ch++) amp[ch] = 0;
    tick(100);

    // event 2: rejected -> no data
    amp[9] = 80;
    bits.delete(); valid_cycles = 0;
    inject(pc);
    tick(2); fpga_reject = 1'b1; tick(); fpga_reject = 1'b0;
    tick(6000);
    check(valid_cycles == 0 && conv_busy == '0, "rejected event is not converted or sent");
    check(blk_busy == 8'h01 << 2, $sformatf("only the sampling block is busy: %b", blk_busy));
    amp[9] = 0;
    tick(100);

    // event 3: no answer -> time-out 16 cycles after the hitmap
    amp[63] = 500;
    inject(pc);
    n = 0;
    while (!evt_timeout && n < 100) begin tick(); n++; end
    check(evt_timeout && n == 16, $sformatf("time-out %0d cycles after the hitmap, expected 16", n));
    tick(50);
    check(valid_cycles == 0 && blk_busy == 8'h01 << 3, "timed-out event freed its block");
    amp[63] = 0;
    tick(100);

    // event 4: 8 bits, 64-cell blocks, ramp current 640 nA
    spi_wr(7'h40, 16'({4'd8, 2'(SEG_64), 1'b1, 4'd7}));
    spi_wr(7'h42, 16'd15);
    nbits = 8; ncell = 64; mir = 15;
    tick(200);
    amp[18] = 150; amp[19] = 120; amp[26] = 30;
    bits.delete(); valid_cycles = 0;
    inject(pc);
    tick(1); fpga_accept = 1'b1; tick(); fpga_accept = 1'b0;
    expect_readout(pc, 1, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mizar_fee: end-to-end test of the front-end board logic, the readout chip
// and the FPGA hitmap validator, at the default sizes (64 channels, 256 cells,
// 8 blocks, 12-bit converter).
//
// The testbench is the SiPM matrix, the SPI master and the DAQ receiver. It
// injects clusters of pixels shaped to hit each of the ten validation cases,
// single pixels that must be rejected (one inside the matrix, one on its edge,
// which raises the edge query), events the validator withholds (80 ns
// time-out), a rejected pattern under force-accept, bursts that fill all eight
// memory blocks (the chip then sends the hitmap only), a calibration test
// pulse, and the three segmentations at 8, 10 and 12 bits. Every frame sent on
// the serial link is decoded: header fields, parity trailer and each sample,
// compared with the code predicted from the injected waveform (the sample
// taken k cycles after t_S, with t_S two clocks after the first threshold
// crossing; code = ceil((V - V_REF_BOTTOM) / ramp step), clipped). Each
// mechanism is counted and one that never happened is a failure.
module tb_mizar_fee;
  import mizar_pkg::*;
  logic               clk = 1'b0, clk_ser = 1'b0, rst_n = 1'b0;
  logic               sclk = 1'b0, csn = 1'b1, mosi = 1'b0, miso;
  logic signed [15:0] v_in_mv [NCH];
  logic               tp_fire = 1'b0, fpga_hold = 1'b0, force_accept = 1'b0;
  logic [1:0]         ser_d;
  logic               ser_valid, hm_valid, hm_data, accept, reject, edge_query;
  logic [NCH-1:0]     hm_hi, hm_lo;
  logic [9:0]         case_hit;
  logic               mem_full, evt_timeout;
  logic [NBLK-1:0]    blk_busy, conv_busy;
  int                 checks = 0, failures = 0;

  always #2.5  clk = ~clk;
  always #1.25 clk_ser = ~clk_ser;

  mizar_fee dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  task automatic tick(int n = 1);
    repeat (n) @(negedge clk);
  endtask

  // ---- mechanism counters --------------------------------------------------
  typedef enum int {M_SPI, M_HIGH_TRIG, M_LOW_TRIG, M_ACCEPT, M_REJECT, M_EDGE_QUERY,
                    M_TIMEOUT, M_FORCE, M_MEM_FULL, M_HITMAP_ONLY, M_TEST_PULSE,
                    M_SEG32, M_SEG64, M_SEG256, M_BITS8, M_BITS12, M_BITS_OTHER,
                    M_CASE0, M_CASE1, M_CASE2, M_CASE3, M_CASE4, M_CASE5,
                    M_CASE6, M_CASE7, M_CASE8, M_CASE9, M_N} mech_e;
  int mech [M_N];

  // ---- SPI master -----------------------------------------------------------
  task automatic spi_wr(input logic [6:0] addr, input logic [15:0] data);
    logic [23:0] f;
    f = {1'b1, addr, data};
    csn = 1'b0; tick(8);
    for (int i = 23; i >= 0; i--) begin
      mosi = f[i]; tick(8); sclk = 1'b1; tick(8); sclk = 1'b0;
    end
    tick(8); csn = 1'b1; tick(16);
    mech[M_SPI]++;
  endtask

  // ---- stimulus: pulses and test pulse ----------------------------------------
  localparam int SHAPE [20] = '{30, 70, 100, 80, 64, 51, 41, 33, 26, 21,
                                17, 13, 11, 9, 7, 5, 4, 3, 2, 1};
  localparam int MAXEV = 64;
  int cyc;
  // the event being injected
  int cur_amp [NCH];
  int cur_t0;
  // settings the chip runs with
  int nbits, ncell, mir, tp_amp, tp_len;
  logic [NCH-1:0] cal_ch;

  // recorded events that produced data, by event id
  int ev_t0 [MAXEV], ev_pts [MAXEV], ev_nbits [MAXEV], ev_ncell [MAXEV], ev_mir [MAXEV];
  int ev_amp [MAXEV][NCH];
  bit ev_tp [MAXEV];
  int ev_frames [MAXEV];
  int n_data_ev;

  // input of channel ch at posedge p: pulse (amp, t0) or test pulse (t0 = fire + 1)
  function automatic int sig(bit tp, int t0, int a, int p);
    int d;
    d = p - t0;
    if (tp) return (d >= 0 && d < tp_len) ? a : 0;
    if (d < 0 || d >= 20) return 0;
    return a * SHAPE[d] / 100;
  endfunction

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk)
    for (int ch = 0; ch < NCH; ch++) v_in_mv[ch] <= 16'(sig(1'b0, cur_t0, cur_amp[ch], cyc + 1));

  function automatic int code_of(int mv, int nb, int m);
    int step, c, top;
    step = (m + 1) * 37;
    top = (1 << nb) - 1;
    c = ((870 + mv - 600) * 1000 + step - 1) / step;
    if (c < 0) c = 0;
    if (c > top) c = top;
    return c;
  endfunction

  // ---- serial stream: capture and decode -----------------------------------------
  bit bits [$];
  int rd_pos;
  int bad_hdr, bad_smp, bad_trl, n_frames;
  always @(posedge clk_ser)
    if (ser_valid && rst_n) begin bits.push_back(ser_d[1]); bits.push_back(ser_d[0]); end

  function automatic int take(inout int pos, input int n);
    int v;
    v = 0;
    for (int i = 0; i < n; i++) begin v = (v << 1) | int'(bits[pos]); pos++; end
    return v;
  endfunction

  // decode all complete frames received so far
  task automatic decode();
    forever begin
      int pos, ch, ev, blk, tsc, sg, nb, nc, par, v, hh;
      if (rd_pos + HDR_BITS > bits.size()) break;
      pos = rd_pos;
      if (take(pos, 8) != 'h5A) bad_hdr++;
      ch = take(pos, 6); ev = take(pos, 16); blk = take(pos, 3);
      tsc = take(pos, 8); sg = take(pos, 2); nb = take(pos, 4); hh = take(pos, 1);
      nc = (sg == 0) ? 32 : (sg == 1) ? 64 : 256;
      if (pos + nc * nb + 2 > bits.size()) break;
      n_frames++;
      if (ev >= n_data_ev) begin
        bad_hdr++;
        $display("  frame for unknown event %0d", ev);
        pos += nc * nb + 2;
        rd_pos = pos;
        continue;
      end
      ev_frames[ev]++;
      if (ch != (ev_frames[ev] - 1) % NCH || nb != ev_nbits[ev] || nc != ev_ncell[ev] ||
          tsc / nc != blk)
        bad_hdr++;
      par = 0;
      for (int k = 0; k < nc; k++) begin
        int e;
        v = take(pos, nb);
        e = code_of(ev_tp[ev] && !cal_ch[ch] ? 0 :
                    sig(ev_tp[ev], ev_t0[ev], ev_amp[ev][ch], ev_pts[ev] - nc / 2 + k),
                    nb, ev_mir[ev]);
        if (v != e) begin
          if (bad_smp < 4) $display("  event %0d ch %0d sample %0d: %0d, expected %0d",
                                    ev, ch, k, v, e);
          bad_smp++;
        end
        par ^= $countones(v) & 1;
      end
      if (take(pos, 1) != par) bad_trl++;
      if (take(pos, 1) != 1) bad_trl++;
      rd_pos = pos;
      if (ch == NCH - 1) begin
        if (nc == 32) mech[M_SEG32]++; else if (nc == 64) mech[M_SEG64]++; else mech[M_SEG256]++;
        if (nb == 8) mech[M_BITS8]++; else if (nb == 12) mech[M_BITS12]++; else mech[M_BITS_OTHER]++;
      end
    end
  endtask

  // ---- events -------------------------------------------------------------------
  // Put a cluster on the matrix, wait for the hitmap and the validator, check
  // the decision against 'exp' (0 accept, 1 reject, 2 no answer), and record
  // the event if the chip keeps its data.
  typedef enum int {E_ACCEPT, E_REJECT, E_NONE} exp_e;

  task automatic fire(input bit tp, input exp_e exp, input int exp_case,
                      input bit exp_edge, input string name);
    int n, dmin, pc;
    logic [NCH-1:0] exp_hi, exp_lo;
    exp_hi = '0; exp_lo = '0; dmin = 99;
    for (int ch = 0; ch < NCH; ch++) begin
      int dl, dh;
      dl = -1; dh = -1;
      for (int d = 19; d >= 0; d--) begin
        int s, fe;
        s = tp ? (cal_ch[ch] && d < tp_len ? tp_amp : 0) : cur_amp[ch] * SHAPE[d] / 100;
        fe = 870 + s;
        if (fe > 884) dl = d;
        if (fe > 984) dh = d;
      end
      if (dl >= 0 && dl < dmin) dmin = dl;
      if (dh >= 0 && dh - dl <= 4) exp_hi[ch] = 1'b1;
      else if (dl >= 0) exp_lo[ch] = 1'b1;
    end
    if (tp) begin
      tp_fire = 1'b1; tick(); tp_fire = 1'b0;
      cur_t0 = cyc + 1;             // test pulse visible from the next edge
      mech[M_TEST_PULSE]++;
    end else begin
      cur_t0 = cyc + 4;
    end
    pc = cur_t0 + dmin;
    n = 0;
    while (!hm_valid && n < 200) begin tick(); n++; end
    check(hm_valid, {name, ": hitmap sent"});
    check(hm_hi == exp_hi && hm_lo == exp_lo,
          $sformatf("%s: hitmaps hi %h (exp %h) lo %h (exp %h)", name, hm_hi, exp_hi, hm_lo, exp_lo));
    if (|hm_hi) mech[M_HIGH_TRIG]++;
    if (|hm_lo) mech[M_LOW_TRIG]++;
    if (!hm_data) mech[M_HITMAP_ONLY]++;
    tick();
    case (exp)
      E_ACCEPT: begin
        check(accept && !reject, {name, ": accepted"});
        if (exp_case >= 0)
          check(case_hit == 10'(1 << exp_case),
                $sformatf("%s: case %b, expected case %0d", name, case_hit, exp_case));
        if (force_accept) mech[M_FORCE]++;
      end
      E_REJECT: begin
        check(reject && !accept && edge_query == exp_edge,
              $sformatf("%s: rejected, edge query %0d", name, edge_query));
        if (edge_query) mech[M_EDGE_QUERY]++;
      end
      default: begin
        check(!accept && !reject, {name, ": no answer"});
        n = 0;
        while (!evt_timeout && n < 40) begin tick(); n++; end
        check(evt_timeout && n == 15, $sformatf("%s: time-out after %0d cycles", name, n + 1));
        if (evt_timeout) mech[M_TIMEOUT]++;
      end
    endcase
    if (accept) mech[M_ACCEPT]++;
    if (reject) mech[M_REJECT]++;
    for (int k = 0; k < 10; k++) if (case_hit[k] && accept) mech[M_CASE0 + k]++;
    if (accept && hm_data) begin
      ev_t0[n_data_ev] = cur_t0;
      ev_pts[n_data_ev] = pc + 2;
      ev_nbits[n_data_ev] = nbits;
      ev_ncell[n_data_ev] = ncell;
      ev_mir[n_data_ev] = mir;
      ev_tp[n_data_ev] = tp;
      for (int ch = 0; ch < NCH; ch++)
        ev_amp[n_data_ev][ch] = tp ? (cal_ch[ch] ? tp_amp : 0) : cur_amp[ch];
      n_data_ev++;
    end
  endtask

  task automatic clear_amps();
    for (int ch = 0; ch < NCH; ch++) cur_amp[ch] = 0;
  endtask

  // cluster of low pixels at (r, c) plus offsets
  task automatic cluster(int r, int c, int k, int a);
    int pr [4], pcl [4], np;
    clear_amps();
    np = 1; pr[0] = 0; pcl[0] = 0;
    case (k)
      1: begin np = 2; pr[1] = 0; pcl[1] = 1; end
      2: begin np = 2; pr[1] = 1; pcl[1] = 0; end
      3: begin np = 2; pr[1] = 1; pcl[1] = 1; end
      4: begin np = 2; pr[1] = 1; pcl[1] = -1; end
      5: begin np = 3; pr[1] = 0; pcl[1] = 1; pr[2] = 1; pcl[2] = 1; end
      6: begin np = 3; pr[1] = 0; pcl[1] = 1; pr[2] = 1; pcl[2] = 0; end
      7: begin np = 3; pr[1] = 1; pcl[1] = -1; pr[2] = 1; pcl[2] = 0; end
      8: begin np = 3; pr[1] = 1; pcl[1] = 0; pr[2] = 1; pcl[2] = 1; end
      9: begin np = 4; pr[1] = 0; pcl[1] = 1; pr[2] = 1; pcl[2] = 0; pr[3] = 1; pcl[3] = 1; end
      default: ;
    endcase
    for (int i = 0; i < np; i++) cur_amp[(r + pr[i]) * COLS + c + pcl[i]] = a;
  endtask

  // wait until conversions and readout are over, then decode
  task automatic drain();
    int quiet, n;
    quiet = 0; n = 0;
    while (quiet < 300 && n < 400000) begin
      tick(); n++;
      if (ser_valid || conv_busy != '0 || $countones(blk_busy) > 1) quiet = 0;
      else quiet++;
    end
    check(quiet >= 300, "chip returns to idle");
    tick(20);
    decode();
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; cur_t0 = -100; n_data_ev = 0; rd_pos = 0; n_frames = 0;
    bad_hdr = 0; bad_smp = 0; bad_trl = 0;
    for (int m = 0; m < M_N; m++) mech[m] = 0;
    for (int e = 0; e < MAXEV; e++) ev_frames[e] = 0;
    clear_amps();
    for (int ch = 0; ch < NCH; ch++) v_in_mv[ch] = '0;
    cal_ch = '0; tp_amp = 250; tp_len = 4;
    tick(3); rst_n = 1'b1; tick(3);

    // ---- configuration: unity gain, high level 1000 mV, 12 bits, 32 cells ----
    spi_wr(7'h40, 16'({4'd12, 2'(SEG_32), 1'b1, 4'd7}));
    spi_wr(7'h44, 16'd1000);
    spi_wr(7'h49, 16'h5A);
    nbits = 12; ncell = 32; mir = 7;
    tick(100);

    // ---- the ten validation cases ----
    clear_amps(); cur_amp[3 * COLS + 3] = 300;
    fire(1'b0, E_ACCEPT, 0, 1'b0, "case 0");
    tick(60);
    for (int k = 1; k <= 9; k++) begin
      cluster(2 + (k % 3), 2 + (k % 4), k, 60);
      fire(1'b0, E_ACCEPT, k, 1'b0, $sformatf("case %0d", k));
      tick(60);
      if (k % 4 == 0) drain();
    end
    drain();

    // ---- rejections, edge query, time-out, force-accept ----
    clear_amps(); cur_amp[4 * COLS + 4] = 60;
    fire(1'b0, E_REJECT, -1, 1'b0, "single low pixel");
    tick(60);
    clear_amps(); cur_amp[0 * COLS + 5] = 60;
    fire(1'b0, E_REJECT, -1, 1'b1, "single low pixel on the edge");
    tick(60);
    cluster(2, 2, 9, 60); cur_amp[4 * COLS + 4] = 60;   // L-shaped 5-pixel cluster
    fire(1'b0, E_REJECT, -1, 1'b0, "cluster larger than any pattern");
    tick(60);
    fpga_hold = 1'b1;
    clear_amps(); cur_amp[5 * COLS + 5] = 300;
    fire(1'b0, E_NONE, -1, 1'b0, "validator holds its answer");
    fpga_hold = 1'b0;
    tick(60);
    force_accept = 1'b1;
    clear_amps(); cur_amp[4 * COLS + 4] = 60;
    fire(1'b0, E_ACCEPT, -1, 1'b0, "force-accept");
    force_accept = 1'b0;
    tick(60);
    drain();

    // ---- burst: fill all eight memory blocks ----
    for (int e = 0; e < 10; e++) begin
      clear_amps(); cur_amp[(e * 7) % NCH] = 300;
      fire(1'b0, E_ACCEPT, 0, 1'b0, $sformatf("burst event %0d", e));
      if (mem_full) mech[M_MEM_FULL]++;
      tick(40);
    end
    drain();

    // ---- calibration test pulse on four channels ----
    clear_amps();
    cal_ch = '0; cal_ch[1 * COLS + 1] = 1'b1; cal_ch[1 * COLS + 2] = 1'b1;
    spi_wr(7'(1 * COLS + 1), 16'h0400 | 16'h01EF);
    spi_wr(7'(1 * COLS + 2), 16'h0400 | 16'h01EF);
    spi_wr(7'h41, 16'd60);
    tp_amp = 60;
    tick(100);
    fire(1'b1, E_ACCEPT, 1, 1'b0, "test pulse");
    drain();
    spi_wr(7'(1 * COLS + 1), 16'h01EF);
    spi_wr(7'(1 * COLS + 2), 16'h01EF);
    cal_ch = '0;

    // ---- 8 bits, 64-cell blocks, 640 nA ramp ----
    spi_wr(7'h40, 16'({4'd8, 2'(SEG_64), 1'b1, 4'd7}));
    spi_wr(7'h42, 16'd15);
    nbits = 8; ncell = 64; mir = 15;
    tick(200);
    cluster(5, 5, 6, 100);
    fire(1'b0, E_ACCEPT, 6, 1'b0, "8 bits, 64 cells");
    tick(80);
    drain();

    // ---- 10 bits, one 256-cell block ----
    spi_wr(7'h40, 16'({4'd10, 2'(SEG_256), 1'b1, 4'd7}));
    spi_wr(7'h42, 16'd7);
    nbits = 10; ncell = 256; mir = 7;
    tick(400);
    clear_amps(); cur_amp[6 * COLS + 1] = 400;
    fire(1'b0, E_ACCEPT, 0, 1'b0, "10 bits, 256 cells");
    if (mem_full) mech[M_MEM_FULL]++;
    drain();

    // ---- results ----
    check(n_frames == NCH * n_data_ev,
          $sformatf("%0d frames for %0d events with data", n_frames, n_data_ev));
    for (int e = 0; e < n_data_ev; e++)
      check(ev_frames[e] == NCH, $sformatf("event %0d: %0d frames", e, ev_frames[e]));
    check(bad_hdr == 0, $sformatf("frame headers: %0d wrong fields", bad_hdr));
    check(bad_smp == 0, $sformatf("samples: %0d wrong", bad_smp));
    check(bad_trl == 0, $sformatf("trailers: %0d wrong", bad_trl));
    for (int m = 0; m < M_N; m++) begin
      mech_e me;
      me = mech_e'(m);
      $display("mechanism %-14s %0d", me.name(), mech[m]);
      if (me != M_BITS_OTHER)
        check(mech[m] > 0, $sformatf("mechanism %s never happened", me.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_analog_channel: self-checking test of the behavioural model of one
// channel's analog part.
//
// Checks the two discriminators against thresholds worked out from
// VTH_GBL - (31 - n) * LSB for random settings, the front-end gain, the
// calibration test pulse (amplitude tp_vb, length tp_len samples, only in
// calibration mode), and the cell/comparator pair: a sample written into a
// cell makes its comparator fire, during a conversion of that cell's block,
// at the first count where the ramp reaches the stored level.
module tb_analog_channel;
  import mizar_pkg::*;
  logic                              clk = 1'b0, rst_n = 1'b0;
  logic signed [15:0]                v_in_mv = '0;
  logic                              tp_fire = 1'b0, cal_mode = 1'b0;
  logic [3:0]                        gain = 4'd7;
  logic [7:0]                        tp_vb = 8'd250, tp_len = 8'd4;
  logic [4:0]                        vth_hi = 5'd15, vth_lo = 5'd15;
  logic [9:0]                        hi_vth_gbl = 10'd900, lo_vth_gbl = 10'd900;
  logic [3:0]                        vth_lsb = 4'd1, mir_vb = 4'd7;
  seg_mode_e                         seg = SEG_32;
  logic                              wr_en = 1'b0;
  logic [CELL_AW-1:0]                wr_addr = '0;
  logic [NBLK-1:0][ADC_MAX_BITS-1:0] cnt = '0;
  logic [NBLK-1:0]                   conv_on = '0;
  logic                              disc_hi, disc_lo;
  logic [NCELLS-1:0]                 comp;
  int                                v_fe_mv;
  int                                checks = 0, failures = 0;

  always #2.5 clk = ~clk;

  analog_channel dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  task automatic tick(int n = 1);
    repeat (n) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tick(3); rst_n = 1'b1; tick();

    // 1. front end gain: v_fe = 870 + v * (gain + 1) / 8
    for (int i = 0; i < 20; i++) begin
      int v;
      gain = 4'($urandom);
      v = int'($urandom % 400) - 50;
      v_in_mv = 16'(v);
      #1;
      check(v_fe_mv == 870 + (v * (int'(gain) + 1)) / 8,
            $sformatf("FE output %0d for %0d mV, gain %0d", v_fe_mv, v, gain));
    end

    // 2. discriminator thresholds: sweep the FE output over each threshold
    gain = 4'd7;
    for (int i = 0; i < 30; i++) begin
      int thh, thl, lo_edge, hi_edge;
      vth_hi = 5'($urandom); vth_lo = 5'($urandom);
      vth_lsb = 4'(1 + $urandom % 3);
      hi_vth_gbl = 10'(900 + $urandom % 60); lo_vth_gbl = 10'(880 + $urandom % 30);
      thh = int'(hi_vth_gbl) - 31 * int'(vth_lsb) + int'(vth_hi) * int'(vth_lsb);
      thl = int'(lo_vth_gbl) - 31 * int'(vth_lsb) + int'(vth_lo) * int'(vth_lsb);
      lo_edge = -1; hi_edge = -1;
      for (int v = -100; v < 200; v++) begin
        v_in_mv = 16'(v); #1;
        if (disc_lo && lo_edge < 0) lo_edge = 870 + v;
        if (disc_hi && hi_edge < 0) hi_edge = 870 + v;
      end
      check(lo_edge == thl + 1 && hi_edge == thh + 1,
            $sformatf("thresholds: low fires at %0d (exp %0d), high at %0d (exp %0d)",
                      lo_edge, thl + 1, hi_edge, thh + 1));
    end

    // 3. test pulse
    v_in_mv = '0; vth_lo = 5'd31; lo_vth_gbl = 10'd900; vth_lsb = 4'd1;
    tp_fire = 1'b1; tick(); tp_fire = 1'b0;
    check(v_fe_mv == 870, "no test pulse without calibration mode");
    cal_mode = 1'b1;
    for (int len = 2; len <= 8; len += 3) begin
      int n;
      tp_len = 8'(len);
      tick(2);
      tp_fire = 1'b1; tick(); tp_fire = 1'b0;
      n = 0;
      check(v_fe_mv == 870 + 250, $sformatf("test pulse amplitude %0d", v_fe_mv - 870));
      while (v_fe_mv != 870 && n < 50) begin tick(); n++; end
      check(n == len, $sformatf("test pulse %0d samples, expected %0d", n, len));
    end
    cal_mode = 1'b0;

    // 4. cells and comparators
    for (int sg = 0; sg < 3; sg++) begin
      seg = seg_mode_e'(sg);
      for (int i = 0; i < 12; i++) begin
        int c, b, v, exp_n, got_n, step, fe;
        c = int'($urandom % NCELLS);
        b = int'(cell_block(seg, CELL_AW'(c)));
        v = int'($urandom % 300);
        mir_vb = 4'(3 + $urandom % 8);
        fe = 870 + v;
        step = (int'(mir_vb) + 1) * 37;
        exp_n = ((fe - 600) * 1000 + step - 1) / step;
        v_in_mv = 16'(v);
        wr_addr = CELL_AW'(c); wr_en = 1'b1; tick(); wr_en = 1'b0;
        v_in_mv = '0;
        conv_on = '0; conv_on[b] = 1'b1;
        got_n = -1;
        for (int k = 0; k < 4096; k++) begin
          cnt[b] = 12'(k); #0.1;
          if (comp[c] && got_n < 0) got_n = k;
        end
        conv_on = '0;
        check(got_n == exp_n || (exp_n > 4095 && got_n < 0),
              $sformatf("cell %0d (%0d mV): comparator at count %0d, expected %0d",
                        c, fe, got_n, exp_n));
        tick();
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_trigger_ctrl: self-checking test of the chip event controller.
//
// Plays the 64 channel triggers directly and checks the three decision paths:
// accept (evt_accept then clear), reject (evt_release then clear) and no
// answer (evt_timeout exactly fpga_tmo cycles, 80 ns, after the hitmap). It
// checks that t_S is reported once per event, that the hitmap waits for every
// open validation window, that it carries the channel flags and whether data
// were stored, and that crossings during a pending decision are ignored.
module tb_trigger_ctrl;
  import mizar_pkg::*;
  logic           clk = 1'b0, rst_n = 1'b0;
  logic [NCH-1:0] xing = '0, pending = '0, hit_hi = '0, hit_lo = '0;
  logic [7:0]     fpga_tmo = 8'd16;
  logic           data_ok = 1'b1, fpga_accept = 1'b0, fpga_reject = 1'b0;
  logic           ts_strobe, hm_valid, hm_data, evt_accept, evt_release, evt_timeout, clear, busy;
  logic [NCH-1:0] hm_hi, hm_lo;
  int             checks = 0, failures = 0;

  always #2.5 clk = ~clk;

  trigger_ctrl dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  task automatic tick(int n = 1);
    repeat (n) @(negedge clk);
  endtask

  // One event: channel a crosses low, channel b crosses later and goes high.
  task automatic event_start(int a, int b, int win);
    xing[a] = 1'b1; pending[a] = 1'b1; tick();
    xing = '0;
    check(ts_strobe, "t_S reported one cycle after the first crossing");
    xing[b] = 1'b1; pending[b] = 1'b1; tick();
    xing = '0;
    check(!ts_strobe, "t_S reported only once per event");
    tick(win);
    pending[b] = 1'b0; hit_hi[b] = 1'b1;
    tick();
    check(!hm_valid, "hitmap waits while a window is open");
    pending[a] = 1'b0; hit_lo[a] = 1'b1;
    tick();
    check(hm_valid && hm_lo[a] && hm_hi[b] && !hm_hi[a] && !hm_lo[b] &&
          $countones(hm_hi | hm_lo) == 2, "hitmap carries the channel flags");
    check(hm_data == data_ok, "hitmap tells whether data were stored");
  endtask

  task automatic release_channels();
    hit_hi = '0; hit_lo = '0; pending = '0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tick(3); rst_n = 1'b1; tick(2);

    // accept
    event_start(9, 10, 3);
    tick(2);
    xing[40] = 1'b1; fpga_accept = 1'b1; tick(); fpga_accept = 1'b0; xing = '0;
    check(evt_accept && clear && !evt_release, "accept path");
    check(!ts_strobe, "crossing during the decision is ignored");
    release_channels(); tick(2);
    check(!busy, "controller re-armed after accept");

    // reject
    data_ok = 1'b0;
    event_start(0, 1, 1);
    tick(5);
    fpga_reject = 1'b1; tick(); fpga_reject = 1'b0;
    check(evt_release && clear && !evt_accept && !evt_timeout, "reject path");
    release_channels(); tick(2);
    data_ok = 1'b1;

    // no answer: time-out after fpga_tmo cycles
    for (int t = 0; t < 3; t++) begin
      int n;
      fpga_tmo = (t == 0) ? 8'd16 : 8'(5 + 7 * t);
      event_start(62, 63, 2);
      n = 0;
      while (!evt_timeout && n < 300) begin tick(); n++; end
      check(n == int'(fpga_tmo), $sformatf("time-out after %0d cycles, expected %0d", n, fpga_tmo));
      check(evt_release && clear, "time-out releases the event and clears the channels");
      release_channels(); tick(2);
      check(!busy, "controller re-armed after time-out");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

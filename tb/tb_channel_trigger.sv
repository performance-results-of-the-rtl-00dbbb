// tb_channel_trigger: self-checking test of the per-channel trigger logic.
//
// Drives the two discriminator inputs on the falling clock edge and checks,
// cycle by cycle, the t_S pulse, the validation window and which trigger is
// forwarded: low only (hit_lo exactly win_len cycles after t_S), low then high
// inside the window (hit_hi, no hit_lo), high after the window (stays low),
// both at once, and the re-arm by 'clear'. A random sweep compares the block
// with a small cycle model for several window lengths.
module tb_channel_trigger;
  logic       clk = 1'b0, rst_n = 1'b0;
  logic       disc_lo = 1'b0, disc_hi = 1'b0, clear = 1'b0;
  logic [7:0] win_len = 8'd4;
  logic       xing, pending, hit_hi, hit_lo;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  channel_trigger dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  task automatic tick(int n = 1);
    repeat (n) @(negedge clk);
  endtask

  task automatic do_clear();
    clear = 1'b1; tick(); clear = 1'b0;
    disc_lo = 1'b0; disc_hi = 1'b0; tick(2);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seed_win, t_hi, got_lo_at;
    tick(3); rst_n = 1'b1; tick(2);

    // A: low only -> hit_lo exactly win_len cycles after the t_S pulse
    disc_lo = 1'b1; tick();
    check(xing && pending, "A: t_S pulse and window open one cycle after the edge");
    begin
      int n;
      n = 0;
      while (!hit_lo && n < 50) begin tick(); n++; end
      check(n == int'(win_len), $sformatf("A: hit_lo after %0d cycles, expected %0d", n, win_len));
    end
    check(!hit_hi && !pending, "A: no high trigger, window closed");
    tick(5);
    check(hit_lo, "A: low trigger held until clear");
    do_clear();
    check(!hit_lo && !hit_hi, "A: clear re-arms");

    // B: low then high inside the window -> only hit_hi
    disc_lo = 1'b1; tick(2); disc_hi = 1'b1; tick();
    check(hit_hi && !hit_lo, "B: high inside window forwards high only");
    tick(10);
    check(hit_hi && !hit_lo, "B: no low trigger later");
    do_clear();

    // C: high after the window -> low trigger stays
    disc_lo = 1'b1; tick(8); disc_hi = 1'b1; tick(2);
    check(hit_lo && !hit_hi, "C: high after window does not change trigger");
    do_clear();

    // D: both at once -> high trigger, no window
    disc_lo = 1'b1; disc_hi = 1'b1; tick();
    check(xing && hit_hi && !pending, "D: simultaneous crossing gives high trigger");
    do_clear();

    // E: no second t_S while held
    disc_lo = 1'b1; tick(10); disc_lo = 1'b0; tick(); disc_lo = 1'b1; tick();
    check(!xing, "E: held channel ignores new crossings");
    do_clear();

    // F: random sweep against a cycle model
    for (int it = 0; it < 200; it++) begin
      seed_win = 1 + ($urandom % 12);
      t_hi     = $urandom % 16;        // cycles after low edge, 15 = none
      win_len  = 8'(seed_win);
      tick();
      disc_lo = 1'b1;
      got_lo_at = -1;
      for (int c = 0; c < 20; c++) begin
        if (c == t_hi && t_hi != 15) disc_hi = 1'b1;
        tick();
        if (hit_lo && got_lo_at < 0) got_lo_at = c;
      end
      // model: a high edge up to win_len samples after the low edge wins
      if (t_hi != 15 && t_hi <= seed_win)
        check(hit_hi && !hit_lo, $sformatf("F: win=%0d hi@%0d expects high", seed_win, t_hi));
      else
        check(hit_lo && !hit_hi && got_lo_at == seed_win,
              $sformatf("F: win=%0d hi@%0d expects low at %0d got %0d", seed_win, t_hi, seed_win, got_lo_at));
      do_clear();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

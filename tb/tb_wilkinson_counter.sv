// tb_wilkinson_counter: self-checking test of one Wilkinson conversion chain.
//
// For every resolution setting (including out-of-range ones, which must be
// clamped to 8..12 bits) it starts a conversion and checks that the count
// steps by one each cycle from 0 to 2^N-1, that 'last' marks the final count,
// and that 'done' comes exactly 2^N cycles after the ramp starts: 4096 cycles,
// 20.48 us at 200 MHz, for 12 bits.
module tb_wilkinson_counter;
  logic        clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [3:0]  adc_bits = 4'd12;
  logic [11:0] count;
  logic        ramp_en, last, done;
  int          checks = 0, failures = 0;

  always #2.5 clk = ~clk;

  wilkinson_counter dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int settings [7] = '{12, 8, 9, 10, 11, 7, 13};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    foreach (settings[s]) begin
      int nb, cyc, exp_cnt;
      bit seq_ok, last_ok;
      nb = settings[s] < 8 ? 8 : (settings[s] > 12 ? 12 : settings[s]);
      adc_bits = 4'(settings[s]);
      start = 1'b1; @(negedge clk); start = 1'b0;
      check(ramp_en && count == 0, $sformatf("bits=%0d: ramp starts at count 0", settings[s]));
      cyc = 0; exp_cnt = 0; seq_ok = 1; last_ok = 1;
      while (!done && cyc < 10000) begin
        if (int'(count) != exp_cnt) seq_ok = 0;
        if (last != (exp_cnt == (1 << nb) - 1)) last_ok = 0;
        exp_cnt++;
        cyc++;
        @(negedge clk);
      end
      check(seq_ok, $sformatf("bits=%0d: count steps by one", settings[s]));
      check(last_ok, $sformatf("bits=%0d: last flags the final count", settings[s]));
      check(cyc == (1 << nb), $sformatf("bits=%0d: conversion took %0d cycles, expected %0d",
                                       settings[s], cyc, 1 << nb));
      check(!ramp_en, "ramp stops after done");
      @(negedge clk);
      check(!done, "done is a single pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

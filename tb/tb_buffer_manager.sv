// tb_buffer_manager: self-checking test of the memory write control and
// derandomizer.
//
// The testbench plays the event controller (ts_strobe, accept, release), the
// conversion chains (conv_done) and the serializer (a four-phase ro_ack that
// follows ro_req). It checks: circular writing of the sampling block; that
// after t_S the block takes exactly half a block more of samples (16 for 32
// cells, 128 for 256) so the stored window is centred on t_S; the move to the
// next free block; accept -> conversion start one cycle later; release ->
// block free; a decision that arrives before the freeze; the readout order and
// the values handed to the serializer; the memory-full state with all eight
// blocks busy, where an event has no data; and the restart on a change of
// segmentation.
module tb_buffer_manager;
  import mizar_pkg::*;
  logic               clk = 1'b0, rst_n = 1'b0;
  seg_mode_e          seg = SEG_32;
  logic [3:0]         adc_bits = 4'd12;
  logic               ts_strobe = 1'b0, evt_accept = 1'b0, evt_release = 1'b0;
  logic [NCH-1:0]     evt_hit_hi = '0;
  logic               data_ok, wr_en;
  logic [CELL_AW-1:0] wr_addr;
  logic [NBLK-1:0]    conv_start, conv_done = '0;
  logic               ro_req, ro_ack = 1'b0, mem_full;
  ro_info_t           ro_info;
  logic [NBLK-1:0]    blk_busy;
  int                 checks = 0, failures = 0;

  always #2.5 clk = ~clk;

  buffer_manager dut (.*);

  // serializer side: acknowledge a few cycles after the request, drop after
  always @(posedge clk) begin
    if (ro_req && !ro_ack) begin repeat (3) @(posedge clk); ro_ack <= 1'b1; end
    else if (!ro_req && ro_ack) begin repeat (2) @(posedge clk); ro_ack <= 1'b0; end
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  task automatic tick(int n = 1);
    repeat (n) @(negedge clk);
  endtask

  // Issue t_S when the sampling block writes offset 'at'; return the block,
  // the t_S cell and the number of samples written after t_S.
  task automatic trigger(input int at, output int blk, output int ts_cell,
                         output int post, output int cycles_to_next);
    int bcn, n;
    bcn = int'(blk_cells(seg));
    n = 0;
    while (!(wr_en && int'(wr_addr) % bcn == at) && n < 2000) begin tick(); n++; end
    blk = int'(wr_addr) / bcn;
    ts_cell = int'(wr_addr);
    ts_strobe = 1'b1; tick(); ts_strobe = 1'b0;
    post = 0; cycles_to_next = 1;
    while (!(wr_en && int'(wr_addr) / bcn != blk) && cycles_to_next < 2000) begin
      if (wr_en && int'(wr_addr) / bcn == blk) post++;
      tick(); cycles_to_next++;
      if (mem_full && !wr_en) break;
    end
  endtask

  task automatic pulse_accept(); evt_accept = 1'b1; tick(); evt_accept = 1'b0; endtask
  task automatic pulse_release(); evt_release = 1'b1; tick(); evt_release = 1'b0; endtask

  task automatic wait_conv_start(int b, int lim, output int n);
    n = 0;
    while (!conv_start[b] && n < lim) begin tick(); n++; end
  endtask

  // convert block b and follow it through the readout
  task automatic convert_and_read(int b, int exp_first, int exp_ts, int exp_evt,
                                  logic [NCH-1:0] exp_hit);
    int n;
    conv_done[b] = 1'b1; tick(); conv_done[b] = 1'b0;
    n = 0;
    while (!ro_req && n < 50) begin tick(); n++; end
    check(ro_req, $sformatf("readout requested for block %0d", b));
    check(int'(ro_info.blk) == b, $sformatf("readout block %0d, expected %0d", ro_info.blk, b));
    check(int'(ro_info.first_cell) == exp_first && int'(ro_info.ts_cell) == exp_ts,
          $sformatf("block %0d first cell %0d (exp %0d), t_S cell %0d (exp %0d)",
                    b, ro_info.first_cell, exp_first, ro_info.ts_cell, exp_ts));
    check(int'(ro_info.evt_id) == exp_evt && ro_info.hit_hi == exp_hit,
          $sformatf("block %0d event id %0d (exp %0d) and high map", b, ro_info.evt_id, exp_evt));
    check(ro_info.adc_bits == adc_bits, "resolution passed to the serializer");
    n = 0;
    while (blk_busy[b] && n < 100) begin tick(); n++; end
    check(!blk_busy[b], $sformatf("block %0d freed after the readout", b));
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int blk, tsc, post, nxt, n, evt;
    int blks [8], tss [8];
    logic [NCH-1:0] hits [8];
    tick(3); rst_n = 1'b1; tick(2);
    evt = 0;

    // 1. circular writing of block 0
    begin
      bit ok;
      int prev;
      ok = 1'b1; prev = int'(wr_addr);
      for (int i = 0; i < 70; i++) begin
        tick();
        if (!wr_en || int'(wr_addr) != (prev + 1) % 32) ok = 1'b0;
        prev = int'(wr_addr);
      end
      check(ok && !mem_full, "sampling block 0 written in a circle of 32 cells");
    end

    // 2. t_S centring, accept after the freeze, readout
    trigger(10, blk, tsc, post, nxt);
    check(blk == 0 && tsc == 10, "t_S in block 0 at cell 10");
    check(post == 15, $sformatf("15 samples after the t_S sample, got %0d", post));
    check(nxt == 17, $sformatf("next block starts 17 cycles after t_S, got %0d", nxt));
    check(int'(wr_addr) / 32 == 1, "sampling moved to block 1");
    check(data_ok && blk_busy[0], "event holds block 0");
    evt_hit_hi = 64'h0000_0000_0010_0000;
    pulse_accept();
    check(conv_start[0], "accept of a frozen block starts its conversion next cycle");
    check(!data_ok, "event closed");
    convert_and_read(0, (10 + 16) % 32, 10, evt, evt_hit_hi);
    evt++;

    // 3. release frees the block
    trigger(3, blk, tsc, post, nxt);
    check(blk == 1, "second event in block 1");
    pulse_release();
    tick();
    check(!blk_busy[1] && conv_start == '0, "release frees block 1 without conversion");

    // 4. decision before the freeze is applied at the freeze
    begin
      int bcur;
      n = 0;
      while (!(wr_en && int'(wr_addr) % 32 == 20) && n < 200) begin tick(); n++; end
      bcur = int'(wr_addr) / 32;
      ts_strobe = 1'b1; tick(); ts_strobe = 1'b0;
      tick(3);
      evt_hit_hi = 64'h8000_0000_0000_0001;
      pulse_accept();
      check(conv_start == '0, "early accept waits for the freeze");
      wait_conv_start(bcur, 40, n);
      check(conv_start[bcur] && n == 17 - 5, $sformatf("early accept converts at the freeze (%0d)", n));
      convert_and_read(bcur, (20 + 16) % 32, bcur * 32 + 20, evt, evt_hit_hi);
      evt++;
    end

    // 5. fill all eight blocks: mem_full and events without data
    for (int e = 0; e < 8; e++) begin
      trigger(int'($urandom % 32), blk, tsc, post, nxt);
      blks[e] = blk; tss[e] = tsc;
      hits[e] = {$urandom, $urandom};
      evt_hit_hi = hits[e];
      check(data_ok, $sformatf("event %0d has a block", e));
      pulse_accept();
      tick();
    end
    check(mem_full && !wr_en && blk_busy == '1, "all eight blocks busy: sampling stops");
    ts_strobe = 1'b1; tick(); ts_strobe = 1'b0;
    check(!data_ok, "event during memory full has no data (hitmap only)");
    pulse_release();
    // release blocks in a shuffled conversion order; FIFO keeps that order
    for (int e = 7; e >= 0; e--) begin
      convert_and_read(blks[e], (tss[e] % 32 + 16) % 32, tss[e], evt + e, hits[e]);
      if (e == 7) begin
        tick(2);
        check(!mem_full && wr_en, "sampling resumes when a block is free");
      end
    end
    evt += 8;

    // 6. segmentation change to one block of 256 cells
    seg = SEG_256;
    tick(3);
    check(blk_busy == 8'h01 && int'(wr_addr) < 4, "restart in block 0 after segmentation change");
    trigger(200, blk, tsc, post, nxt);
    check(post == 127, $sformatf("256 cells: 127 samples after the t_S sample, got %0d", post));
    check(mem_full, "single block held: memory full");
    pulse_accept();
    check(conv_start[0], "single block converted");
    convert_and_read(0, (200 + 128) % 256, 200, evt, evt_hit_hi);
    evt++;

    // 7. 64-cell segmentation
    seg = SEG_64;
    tick(3);
    trigger(5, blk, tsc, post, nxt);
    check(post == 31 && nxt == 33, $sformatf("64 cells: 31 samples after t_S, next block after %0d", nxt));
    check(int'(wr_addr) / 64 == 1, "64 cells: sampling moved to block 1");
    pulse_release();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

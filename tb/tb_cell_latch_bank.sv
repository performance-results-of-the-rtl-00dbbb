// tb_cell_latch_bank: self-checking test of one channel's code latches.
//
// The testbench plays the conversion chains (a counter per block) and the
// cell comparators (high once the count reaches the cell's target code). It
// converts blocks one at a time and two at once, with 32-, 64- and 256-cell
// segmentation and 8- and 12-bit resolution, then reads every cell back and
// compares it with its target (full scale for cells whose comparator never
// fires). Cells of blocks that were not converted must keep their codes.
module tb_cell_latch_bank;
  import mizar_pkg::*;
  logic                              clk = 1'b0, rst_n = 1'b0;
  seg_mode_e                         seg = SEG_32;
  logic [NCELLS-1:0]                 comp;
  logic [NBLK-1:0][ADC_MAX_BITS-1:0] cnt;
  logic [NBLK-1:0]                   conv_on, conv_last, conv_start;
  logic [CELL_AW-1:0]                rd_cell;
  logic [ADC_MAX_BITS-1:0]           rd_data;
  int                                checks = 0, failures = 0;

  int target [NCELLS];
  int expect_code [NCELLS];
  int cntv [NBLK];
  bit onv [NBLK];
  int topv;

  always #2.5 clk = ~clk;

  cell_latch_bank dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  function automatic int bsize(seg_mode_e s);
    return s == SEG_32 ? 32 : (s == SEG_64 ? 64 : 256);
  endfunction

  always_comb begin
    for (int b = 0; b < NBLK; b++) begin
      cnt[b]       = 12'(cntv[b]);
      conv_on[b]   = onv[b];
      conv_last[b] = onv[b] && cntv[b] == topv;
    end
    for (int c = 0; c < NCELLS; c++) begin
      int b;
      b = c / bsize(seg);
      comp[c] = onv[b] && cntv[b] >= target[c];
    end
  end

  // Convert the listed blocks together, the second one starting 'lag' later.
  task automatic convert(int b0, int b1, int lag, int bits);
    int t;
    topv = (1 << bits) - 1;
    conv_start = '0;
    conv_start[b0] = 1'b1;
    if (b1 >= 0 && lag == 0) conv_start[b1] = 1'b1;
    @(negedge clk);
    conv_start = '0;
    onv[b0] = 1; cntv[b0] = 0;
    if (b1 >= 0 && lag == 0) begin onv[b1] = 1; cntv[b1] = 0; end
    t = 0;
    while (onv[b0] || (b1 >= 0 && (onv[b1] || t <= lag))) begin
      if (b1 >= 0 && t == lag && lag != 0) conv_start[b1] = 1'b1;
      @(negedge clk);
      if (b1 >= 0 && t == lag && lag != 0) begin conv_start[b1] = 1'b0; onv[b1] = 1; cntv[b1] = 0; end
      else begin
        for (int b = 0; b < NBLK; b++)
          if (onv[b]) begin
            if (cntv[b] == topv) onv[b] = 0; else cntv[b]++;
          end
      end
      t++;
    end
    for (int c = 0; c < NCELLS; c++) begin
      int b;
      b = c / bsize(seg);
      if (b == b0 || b == b1) expect_code[c] = target[c] > topv ? topv : target[c];
    end
  endtask

  task automatic read_all(string tag);
    int bad;
    bad = 0;
    for (int c = 0; c < NCELLS; c++) begin
      rd_cell = 8'(c);
      #0.1;
      if (int'(rd_data) != expect_code[c]) begin
        if (bad < 4) $display("  cell %0d: got %0d expected %0d", c, rd_data, expect_code[c]);
        bad++;
      end
    end
    check(bad == 0, $sformatf("%s: all 256 codes as expected (%0d wrong)", tag, bad));
  endtask

  task automatic new_targets(int maxv);
    for (int c = 0; c < NCELLS; c++) target[c] = $urandom % maxv;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NBLK; b++) begin cntv[b] = 0; onv[b] = 0; end
    for (int c = 0; c < NCELLS; c++) expect_code[c] = 0;
    conv_start = '0; rd_cell = '0; topv = 4095;
    new_targets(4096);
    repeat (3) @(negedge clk); rst_n = 1'b1; @(negedge clk);

    // 32-cell blocks, 12 bits: block 3 alone, then blocks 0 and 6 overlapping
    convert(3, -1, 0, 12);
    read_all("seg32 block 3");
    new_targets(4096);
    convert(0, 6, 700, 12);
    read_all("seg32 blocks 0+6 overlapping");
    // 8 bits: targets above 255 saturate at full scale
    new_targets(400);
    convert(5, 7, 0, 8);
    read_all("seg32 8-bit with full-scale cells");
    // 64-cell blocks
    seg = SEG_64;
    new_targets(4096);
    convert(2, -1, 0, 12);
    read_all("seg64 block 2");
    // one 256-cell block, 10 bits
    seg = SEG_256;
    new_targets(1100);
    convert(0, -1, 0, 10);
    read_all("seg256 10-bit");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

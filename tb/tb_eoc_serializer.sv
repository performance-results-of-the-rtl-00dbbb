// tb_eoc_serializer: self-checking test of the end-of-column serializer.
//
// Stands in for the latch banks with a code that is a fixed function of
// channel and cell, requests the readout of a block with the four-phase
// handshake, collects the two-bit stream and decodes it frame by frame. Checks
// every header field, every sample (oldest first from first_cell, wrapping
// inside the block), the parity/end trailer, that the stream has no gaps, and
// the total length: 64 x (48 + cells x bits + 2) bits at two bits per 400 MHz
// cycle, i.e. 13,888 cycles (34.72 us) for 32 cells at 12 bits.
module tb_eoc_serializer;
  import mizar_pkg::*;
  logic                    clk_ser = 1'b0, rst_n = 1'b0;
  logic                    ro_req = 1'b0, ro_ack;
  ro_info_t                ro_info;
  logic [7:0]              chip_id = 8'hA5;
  logic [CH_AW-1:0]        rd_ch;
  logic [CELL_AW-1:0]      rd_cell;
  logic [ADC_MAX_BITS-1:0] rd_data;
  logic [1:0]              ser_d;
  logic                    ser_valid;
  int                      checks = 0, failures = 0;

  always #1.25 clk_ser = ~clk_ser;

  eoc_serializer dut (.*);

  function automatic logic [11:0] code(int ch, int cl);
    return 12'((ch * 977 + cl * 131 + (ch ^ cl) * 17) & 12'hFFF);
  endfunction
  assign rd_data = code(int'(rd_ch), int'(rd_cell));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  // stream capture
  bit  bits [$];
  int  valid_cycles, first_v, last_v, cyc;
  always @(posedge clk_ser) begin
    cyc++;
    if (ser_valid) begin
      bits.push_back(ser_d[1]);
      bits.push_back(ser_d[0]);
      valid_cycles++;
      if (first_v < 0) first_v = cyc;
      last_v = cyc;
    end
  end

  function automatic int take(inout int pos, input int n);
    int v;
    v = 0;
    for (int i = 0; i < n; i++) begin v = (v << 1) | int'(bits[pos]); pos++; end
    return v;
  endfunction

  task automatic run(seg_mode_e s, int nb, int blk, int first, int ts, int evt);
    int ncell, pos, n, bad_hdr, bad_smp, bad_trl;
    logic [NCH-1:0] hh;
    ncell = int'(blk_cells(s));
    hh = {$urandom, $urandom};
    ro_info.blk = BLK_AW'(blk);
    ro_info.first_cell = CELL_AW'(first);
    ro_info.ts_cell = CELL_AW'(ts);
    ro_info.evt_id = 16'(evt);
    ro_info.hit_hi = hh;
    ro_info.seg = s;
    ro_info.adc_bits = 4'(nb);
    bits.delete(); valid_cycles = 0; first_v = -1; last_v = -1;
    @(negedge clk_ser); ro_req = 1'b1;
    n = 0;
    while (!ro_ack && n < 300000) begin @(negedge clk_ser); n++; end
    check(ro_ack, "ro_ack after the last bit");
    ro_req = 1'b0;
    n = 0;
    while (ro_ack && n < 20) begin @(negedge clk_ser); n++; end
    check(!ro_ack, "ro_ack falls after ro_req");
    // length and gaps
    check(valid_cycles == NCH * (HDR_BITS + ncell * nb + TRL_BITS) / 2,
          $sformatf("%0d cells x %0d bits: %0d valid cycles, expected %0d", ncell, nb,
                    valid_cycles, NCH * (HDR_BITS + ncell * nb + TRL_BITS) / 2));
    check(last_v - first_v + 1 == valid_cycles, "no gaps in the stream");
    // decode
    pos = 0; bad_hdr = 0; bad_smp = 0; bad_trl = 0;
    for (int ch = 0; ch < NCH; ch++) begin
      int par, v;
      if (take(pos, 8) != 'hA5) bad_hdr++;
      if (take(pos, 6) != ch) bad_hdr++;
      if (take(pos, 16) != evt) bad_hdr++;
      if (take(pos, 3) != blk) bad_hdr++;
      if (take(pos, 8) != ts) bad_hdr++;
      if (take(pos, 2) != int'(s)) bad_hdr++;
      if (take(pos, 4) != nb) bad_hdr++;
      if (take(pos, 1) != int'(hh[ch])) bad_hdr++;
      par = 0;
      for (int k = 0; k < ncell; k++) begin
        int exp_c;
        exp_c = int'(code(ch, blk * ncell + (first + k) % ncell)) & ((1 << nb) - 1);
        v = take(pos, nb);
        if (v != exp_c) bad_smp++;
        par ^= $countones(v) & 1;
      end
      if (take(pos, 1) != par) bad_trl++;
      if (take(pos, 1) != 1) bad_trl++;
    end
    check(bad_hdr == 0, $sformatf("headers: %0d wrong fields", bad_hdr));
    check(bad_smp == 0, $sformatf("samples: %0d wrong", bad_smp));
    check(bad_trl == 0, $sformatf("trailers: %0d wrong", bad_trl));
  endtask

  initial begin
    repeat (400000) @(posedge clk_ser);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0;
    ro_info = '0;
    repeat (3) @(negedge clk_ser); rst_n = 1'b1; repeat (2) @(negedge clk_ser);
    // the paper's typical event: 32 cells, 12 bits -> 13,888 cycles
    run(SEG_32, 12, 3, 26, 3 * 32 + 10, 7);
    check(valid_cycles == 13888, "27,776 bits per event in 13,888 cycles (34.72 us)");
    run(SEG_32, 8, 5, 0, 5 * 32 + 16, 8);
    run(SEG_64, 10, 2, 40, 2 * 64 + 7, 9);
    run(SEG_256, 9, 0, int'($urandom % 256), 100, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

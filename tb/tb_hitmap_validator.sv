// tb_hitmap_validator: self-checking test of the FPGA hitmap pattern matcher.
//
// Directed cases: every pattern case 0..9 placed at random positions, the
// three examples of the pattern-matching illustration (a pair that matches,
// a row of three that matches no case, a pair with a third hit next to it),
// single low pixels inside and on the edge (edge_query), force_accept and
// hold. A random sweep compares accept/reject with a reference written
// independently: it lists the hit pixels near each candidate main pixel as a
// set and compares that set with each case's pixel list.
module tb_hitmap_validator;
  import mizar_pkg::*;
  logic           clk = 1'b0, rst_n = 1'b0;
  logic           hm_valid = 1'b0, hold = 1'b0, force_accept = 1'b0;
  logic [NCH-1:0] hm_hi = '0, hm_lo = '0;
  logic           accept, reject, edge_query;
  logic [9:0]     case_hit;
  int             checks = 0, failures = 0;
  int             dim, npix;   // matrix size, set at run time

  always #2.5 clk = ~clk;

  hitmap_validator dut (.*);

  // case pixel lists, (row, col) from M
  int cr [10][4] = '{'{0,0,0,0}, '{0,0,0,0}, '{0,1,0,0}, '{0,1,0,0}, '{0,1,0,0},
                     '{0,0,1,0}, '{0,0,1,0}, '{0,1,1,0}, '{0,1,1,0}, '{0,0,1,1}};
  int cc [10][4] = '{'{0,0,0,0}, '{0,1,0,0}, '{0,0,0,0}, '{0,1,0,0}, '{0,-1,0,0},
                     '{0,1,1,0}, '{0,1,0,0}, '{0,-1,0,0}, '{0,0,1,0}, '{0,1,0,1}};
  int cn [10]    = '{1, 2, 2, 2, 2, 3, 3, 3, 3, 4};

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  function automatic logic [NCH-1:0] place(int k, int r, int c);
    logic [NCH-1:0] m;
    int p;
    m = '0;
    p = 0;
    while (p < cn[k]) begin m[(r + cr[k][p]) * 8 + c + cc[k][p]] = 1'b1; p++; end
    return m;
  endfunction

  // reference: exact match of the hit set near M with a case's set
  function automatic bit ref_match(logic [NCH-1:0] m, int k);
    int r, c, p, i, ins, near_hits, pat_hits, near, pr, pc, dr, dc;
    r = 0;
    while (r < dim) begin
      c = 0;
      while (c < dim) begin
        ins = 1; pat_hits = 0; p = 0;
        while (p < cn[k]) begin
          pr = r + cr[k][p]; pc = c + cc[k][p];
          if (pr < 0 || pr > 7 || pc < 0 || pc > 7) ins = 0;
          else if (m[pr*8+pc]) pat_hits++;
          p++;
        end
        if (ins == 1 && pat_hits == cn[k]) begin
          // count hits within one row and one column of any pattern pixel
          near_hits = 0; i = 0;
          while (i < npix) begin
            near = 0; p = 0;
            while (p < cn[k]) begin
              dr = i / 8 - r - cr[k][p];
              dc = i % 8 - c - cc[k][p];
              if (dr >= -1 && dr <= 1 && dc >= -1 && dc <= 1) near = 1;
              p++;
            end
            if (near == 1 && m[i]) near_hits++;
            i++;
          end
          if (near_hits == cn[k]) return 1;
        end
        c++;
      end
      r++;
    end
    return 0;
  endfunction

  function automatic bit ref_accept(logic [NCH-1:0] hi, logic [NCH-1:0] lo);
    for (int k = 0; k <= 4; k++) if (ref_match(hi, k)) return 1;
    for (int k = 1; k <= 9; k++) if (ref_match(hi | lo, k)) return 1;
    return 0;
  endfunction

  task automatic send(logic [NCH-1:0] hi, logic [NCH-1:0] lo);
    hm_hi = hi; hm_lo = lo; hm_valid = 1'b1;
    @(negedge clk);
    hm_valid = 1'b0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dim = 8; npix = 64;
    repeat (3) @(negedge clk); rst_n = 1'b1; @(negedge clk);

    // every case, high map for 0..4, low map for 1..9, random interior position
    for (int k = 0; k < 10; k++) begin
      for (int rep = 0; rep < 4; rep++) begin
        int r, c;
        logic [NCH-1:0] m;
        r = 1 + $urandom % 5; c = 2 + $urandom % 4;
        m = place(k, r, c);
        if (k <= 4) begin
          send(m, '0);
          check(accept && !reject && case_hit[k], $sformatf("case %0d on high map accepted", k));
        end
        if (k >= 1) begin
          send('0, m);
          check(accept && !reject && case_hit[k], $sformatf("case %0d on low map accepted", k));
        end
      end
    end
    // case 0 needs the high threshold
    send('0, place(0, 3, 3));
    check(reject && !accept, "single low pixel rejected");
    check(!edge_query, "interior single pixel: no edge query");
    send('0, place(0, 0, 5));
    check(reject && edge_query, "single low edge pixel: rejected with edge query");
    send('0, place(0, 4, 7));
    check(reject && edge_query, "single low edge pixel, right column");
    // illustration examples (row 3)
    send('0, (64'b1 << 27) | (64'b1 << 28));
    check(accept && case_hit[1], "pair of pixels matches case 1");
    send('0, (64'b1 << 26) | (64'b1 << 27) | (64'b1 << 28));
    check(reject && !accept, "row of three matches no case");
    // a case with an extra hit touching it fails
    send('0, place(9, 2, 2) | (64'b1 << (4*8 + 4)));
    check(reject, "2x2 plus a diagonal neighbour rejected");
    // two separate clusters, one valid: accepted
    send('0, place(2, 1, 1) | place(5, 5, 5));
    check(accept, "two valid clusters accepted");
    // force_accept and hold
    force_accept = 1'b1;
    send('0, (64'b1 << 26) | (64'b1 << 27) | (64'b1 << 28));
    check(accept, "force_accept accepts any hitmap");
    force_accept = 1'b0;
    hold = 1'b1;
    send('0, place(1, 3, 3));
    check(!accept && !reject, "hold withholds the answer");
    hold = 1'b0;

    // random sweep
    for (int it = 0; it < 600; it++) begin
      logic [NCH-1:0] hi, lo;
      int n, r0, c0, idx;
      bit exp_acc;
      hi = '0; lo = '0;
      n = 1 + $urandom % 5; r0 = $urandom % 6; c0 = $urandom % 6;
      for (int p = 0; p < n; p++) begin
        idx = (r0 + $urandom % 3) * 8 + c0 + $urandom % 3;
        if ($urandom % 3 == 0) hi[idx] = 1'b1; else lo[idx] = 1'b1;
      end
      send(hi, lo);
      exp_acc = ref_accept(hi, lo);
      check(accept == exp_acc && reject == !exp_acc,
            $sformatf("random map hi=%h lo=%h expected accept=%0d", hi, lo, exp_acc));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

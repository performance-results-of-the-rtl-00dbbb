// hitmap_validator: the FPGA's decision on one ASIC hitmap.
//
// Each ASIC sends, for its 8x8 pixels, which ones gave a high trigger and
// which a low one. The validator takes every pixel in turn as the main pixel
// M and compares its surroundings with ten pattern cases, all in parallel:
//
//   case 0 {M}                        high-threshold cases 0..4
//   case 1 {M, right}                 low-threshold  cases 1..9
//   case 2 {M, below}
//   case 3 {M, below-right}
//   case 4 {M, below-left}
//   case 5 {M, right, below-right}
//   case 6 {M, right, below}
//   case 7 {M, below-left, below}
//   case 8 {M, below, below-right}
//   case 9 {M, right, below, below-right}
//
// A case matches when all of its pixels are hit and no other pixel touching
// them (its 8-neighbourhood) is hit: the hit pattern must be exactly the
// fingerprint, so a cluster larger than the pattern does not match it.
// Pixels outside the matrix count as not hit. High cases are checked on the
// high map, low cases on (low OR high), since a pixel over the high threshold
// is also over the low one. Any match accepts the event; otherwise it is
// rejected, and edge_query is raised when the only triggered pixel lies on the
// matrix edge (the FPGA may then look at the neighbouring ASIC, which is
// outside this module). The patterns, the exact-match rule and the three
// decisions follow the paper; the use of (low OR high) and the one-cycle
// latency are choices of this design.
//
// Test features: 'force_accept' accepts every hitmap (raw-data mode used in
// the lab), 'hold' withholds the answer, which lets the ASIC time out.
// Timing: accept/reject/case_hit/edge_query one cycle after hm_valid.
module hitmap_validator
  import mizar_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           hm_valid,
  input  logic [NCH-1:0] hm_hi,
  input  logic [NCH-1:0] hm_lo,
  input  logic           hold,
  input  logic           force_accept,
  output logic           accept,
  output logic           reject,
  output logic [9:0]     case_hit,
  output logic           edge_query
);

  // Pattern pixels as (row, col) offsets from M; up to four per case.
  localparam int NP [10] = '{1, 2, 2, 2, 2, 3, 3, 3, 3, 4};
  localparam int PR [10][4] = '{
    '{0, 0, 0, 0}, '{0, 0, 0, 0}, '{0, 1, 0, 0}, '{0, 1, 0, 0}, '{0, 1, 0, 0},
    '{0, 0, 1, 0}, '{0, 0, 1, 0}, '{0, 1, 1, 0}, '{0, 1, 1, 0}, '{0, 0, 1, 1}};
  localparam int PC [10][4] = '{
    '{0, 0, 0, 0}, '{0, 1, 0, 0}, '{0, 0, 0, 0}, '{0, 1, 0, 0}, '{0, -1, 0, 0},
    '{0, 1, 1, 0}, '{0, 1, 0, 0}, '{0, -1, 0, 0}, '{0, 0, 1, 0}, '{0, 1, 0, 1}};

  // 5x5 masks around M, bit (dr+2)*5 + (dc+2): the pattern pixels and their
  // 8-neighbourhood, computed once at elaboration.
  function automatic logic [24:0] pat_mask(int k);
    logic [24:0] m = '0;
    for (int p = 0; p < 4; p++)
      if (p < NP[k]) m[(PR[k][p] + 2) * 5 + PC[k][p] + 2] = 1'b1;
    return m;
  endfunction

  function automatic logic [24:0] hood_mask(int k);
    logic [24:0] m = '0;
    for (int p = 0; p < 4; p++)
      for (int dr = -1; dr <= 1; dr++)
        for (int dc = -1; dc <= 1; dc++)
          if (p < NP[k]) m[(PR[k][p] + dr + 2) * 5 + PC[k][p] + dc + 2] = 1'b1;
    return m;
  endfunction

  logic [NCH-1:0] any_map;
  logic [9:0]     match;
  logic [4:1]     match_hi;
  logic           single_edge;

  assign any_map = hm_hi | hm_lo;

  // Maps padded with two empty rows and columns on every side.
  logic [ROWS+3:0][COLS+3:0] pad_hi, pad_any;
  always_comb begin
    pad_hi  = '0;
    pad_any = '0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        pad_hi[r+2][c+2]  = hm_hi[r*COLS + c];
        pad_any[r+2][c+2] = any_map[r*COLS + c];
      end
  end

  // For every main pixel: the 5x5 window of each map, then every case.
  logic [9:0] m_any [ROWS*COLS];
  logic [9:0] m_hi  [ROWS*COLS];
  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      logic [24:0] w_hi, w_any;
      for (genvar dr = 0; dr < 5; dr++) begin : g_dr
        for (genvar dc = 0; dc < 5; dc++) begin : g_dc
          assign w_hi[dr*5 + dc]  = pad_hi[r+dr][c+dc];
          assign w_any[dr*5 + dc] = pad_any[r+dr][c+dc];
        end
      end
      for (genvar k = 0; k < 10; k++) begin : g_k
        localparam logic [24:0] PM = pat_mask(k);
        localparam logic [24:0] HM = hood_mask(k);
        assign m_any[r*COLS + c][k] = (((w_any ^ PM) & HM) == '0);
        assign m_hi[r*COLS + c][k]  = (((w_hi  ^ PM) & HM) == '0);
      end
    end
  end

  // Case 0 only on the high map; cases 1..4 on both; 5..9 on (low OR high).
  always_comb begin
    match    = '0;
    match_hi = '0;
    for (int i = 0; i < ROWS*COLS; i++) begin
      match[0]    |= m_hi[i][0];
      match[9:1]  |= m_any[i][9:1];
      match_hi    |= m_hi[i][4:1];
    end
  end

  always_comb begin
    single_edge = 1'b0;
    if ($countones(any_map) == 1) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          if (any_map[r*COLS + c] && (r == 0 || r == ROWS-1 || c == 0 || c == COLS-1))
            single_edge = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      accept     <= 1'b0;
      reject     <= 1'b0;
      case_hit   <= '0;
      edge_query <= 1'b0;
    end else begin
      accept     <= 1'b0;
      reject     <= 1'b0;
      edge_query <= 1'b0;
      if (hm_valid) begin
        case_hit <= match | {5'b0, match_hi, 1'b0};
        if (!hold) begin
          if (force_accept || (|match) || (|match_hi)) begin
            accept <= 1'b1;
          end else begin
            reject     <= 1'b1;
            edge_query <= single_edge;
          end
        end
      end
    end
  end

endmodule

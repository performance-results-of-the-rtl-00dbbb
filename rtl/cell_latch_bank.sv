// cell_latch_bank: the digital column of one channel, one 12-bit code latch
// per analog memory cell.
//
// While the conversion chain of a block runs, every cell of that block watches
// its comparator. In the first cycle the comparator is high, the cell stores
// the chain's running count, which is the Wilkinson code of its sample. A cell
// whose comparator never fires stores the last count (full scale). The start
// pulse of a chain re-arms the cells of its block; cells of other blocks keep
// their codes, so eight blocks can convert and be read out independently.
// One code per cell with latches is the paper's; registers clocked at 200 MHz
// in place of transparent latches, and the full-scale rule, are choices of
// this design.
//
// Interface: comp[c] from the analog cell, cnt/conv_on/conv_last/conv_start of
// the NBLK chains, segmentation (cell to block map), and a combinational read
// port rd_cell -> rd_data used by the serializer once the block is converted.
// Timing: a code is stored at the clock edge where comp and conv_on are high.
module cell_latch_bank
  import mizar_pkg::*;
#(
  parameter int NC   = NCELLS,
  parameter int NB   = NBLK,
  parameter int MAXB = ADC_MAX_BITS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  seg_mode_e                 seg,
  input  logic [NC-1:0]             comp,
  input  logic [NB-1:0][MAXB-1:0]   cnt,
  input  logic [NB-1:0]             conv_on,
  input  logic [NB-1:0]             conv_last,
  input  logic [NB-1:0]             conv_start,
  input  logic [$clog2(NC)-1:0]     rd_cell,
  output logic [MAXB-1:0]           rd_data
);

  logic [MAXB-1:0] code [NC];
  logic [NC-1:0]   got;

  function automatic int unsigned blk_of(seg_mode_e s, int unsigned c);
    case (s)
      SEG_32:  return (c / 32) % NB;
      SEG_64:  return (c / 64) % NB;
      default: return 0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got <= '0;
      for (int c = 0; c < NC; c++) code[c] <= '0;
    end else begin
      for (int c = 0; c < NC; c++) begin
        int unsigned b;
        b = blk_of(seg, c);
        if (conv_start[b]) begin
          got[c] <= 1'b0;
        end else if (conv_on[b] && !got[c] && (comp[c] || conv_last[b])) begin
          code[c] <= cnt[b];
          got[c]  <= 1'b1;
        end
      end
    end
  end

  assign rd_data = code[rd_cell];

endmodule

// eoc_serializer: end-of-column readout of one converted memory block.
//
// For every channel, in channel order, it sends a frame made of a 48-bit
// header, the block's samples oldest first (adc_bits each, MSB first) and a
// 2-bit trailer. With 32 cells at 12 bits this is 48 + 384 + 2 = 434 bits per
// channel and 27,776 bits per event, the paper's figures. The serializer runs
// on the 400 MHz clock and sends two bits per cycle (ser_d[1] first, ser_d[0]
// second), which a DDR output cell turns into an 800 Mb/s lane: 13,888 cycles,
// 34.72 us, per event, as in the paper.
//
// Inside, a 64-bit gearbox is filled with one item per cycle (a 12-bit header
// chunk, a sample, or the trailer) and drained by two bits per cycle, so the
// stream has no gaps. Samples are read through rd_ch/rd_cell/rd_data from the
// latch banks of the frozen block, which do not change during readout; only
// the request is synchronized into this clock domain.
//
// Choices of this design (the paper gives only the sizes): header = chip id 8,
// channel 6, event id 16, block 3, t_S cell 8, segmentation 2, resolution 4,
// high-trigger flag 1; trailer = even parity of the channel's sample bits and
// a 1 end marker; four-phase ro_req/ro_ack handshake with the buffer manager.
// Timing: ser_valid rises four cycles after ro_req is seen high; ro_ack rises
// after the last bit and falls after ro_req falls.
module eoc_serializer
  import mizar_pkg::*;
#(
  parameter int N_CH = NCH
) (
  input  logic                     clk_ser,
  input  logic                     rst_n,
  input  logic                     ro_req,
  input  ro_info_t                 ro_info,
  input  logic [7:0]               chip_id,
  output logic [$clog2(N_CH)-1:0]  rd_ch,
  output logic [CELL_AW-1:0]       rd_cell,
  input  logic [ADC_MAX_BITS-1:0]  rd_data,
  output logic [1:0]               ser_d,
  output logic                     ser_valid,
  output logic                     ro_ack
);

  localparam int CW = $clog2(N_CH);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_ACK} st_e;
  typedef enum logic [1:0] {P_HDR, P_SMP, P_TRL, P_END} ph_e;

  st_e          st;
  ph_e          ph;
  logic         req_s1, req_s2;
  logic [63:0]  sbuf;
  logic [6:0]   scnt;
  logic [CW-1:0] ch;
  logic [CELL_AW:0] idx;
  logic         par;

  logic [3:0]   nbits;
  logic [CELL_AW:0] ncell;
  logic [CELL_AW-1:0] base;
  logic [HDR_BITS-1:0] hdr;
  logic [11:0]  item;
  logic [4:0]   w;
  logic [11:0]  smask;
  logic         do_out, do_app;
  logic [6:0]   cnt_a;
  logic [63:0]  buf_a;

  always_comb begin
    nbits = clamp_bits(ro_info.adc_bits);
    ncell = (CELL_AW+1)'(blk_cells(ro_info.seg));
    base  = CELL_AW'(int'(ro_info.blk) * int'(ncell));
    smask = 12'((1 << nbits) - 1);
    hdr   = {chip_id, 6'(ch), ro_info.evt_id, 3'(ro_info.blk),
             8'(ro_info.ts_cell), 2'(ro_info.seg), nbits, ro_info.hit_hi[ch]};
    rd_ch   = ch;
    rd_cell = base + CELL_AW'((idx + (CELL_AW+1)'(ro_info.first_cell)) & (ncell - 1'b1));
    case (ph)
      P_HDR:   begin item = hdr[HDR_BITS-1-12*int'(idx) -: 12]; w = 5'd12; end
      P_SMP:   begin item = rd_data & smask;                   w = 5'(nbits); end
      P_TRL:   begin item = {10'b0, par, 1'b1};                w = 5'd2; end
      default: begin item = '0;                                w = 5'd0; end
    endcase
    do_out = (st == S_RUN) && (scnt >= 7'd2);
    cnt_a  = do_out ? scnt - 7'd2 : scnt;
    buf_a  = do_out ? (sbuf << 2) : sbuf;
    do_app = (st == S_RUN) && (ph != P_END) && (int'(cnt_a) + int'(w) <= 64);
  end

  always_ff @(posedge clk_ser or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      ph        <= P_END;
      req_s1    <= 1'b0;
      req_s2    <= 1'b0;
      sbuf      <= '0;
      scnt      <= '0;
      ch        <= '0;
      idx       <= '0;
      par       <= 1'b0;
      ser_d     <= '0;
      ser_valid <= 1'b0;
      ro_ack    <= 1'b0;
    end else begin
      req_s1    <= ro_req;
      req_s2    <= req_s1;
      ser_valid <= do_out;
      if (do_out) ser_d <= sbuf[63:62];

      case (st)
        S_IDLE: if (req_s2 && !ro_ack) begin
          st   <= S_RUN;
          ph   <= P_HDR;
          ch   <= '0;
          idx  <= '0;
          par  <= 1'b0;
          sbuf <= '0;
          scnt <= '0;
        end else if (!req_s2) begin
          ro_ack <= 1'b0;
        end
        S_RUN: begin
          sbuf <= buf_a;
          scnt <= cnt_a;
          if (do_app) begin
            sbuf <= buf_a | ({52'b0, item} << (7'd64 - cnt_a - 7'(w)));
            scnt <= cnt_a + 7'(w);
            case (ph)
              P_HDR: if (idx == 3) begin
                ph <= P_SMP; idx <= '0; par <= 1'b0;
              end else idx <= idx + 1'b1;
              P_SMP: begin
                par <= par ^ (^item);
                if (idx == ncell - 1'b1) begin
                  ph <= P_TRL; idx <= '0;
                end else idx <= idx + 1'b1;
              end
              P_TRL: if (ch == CW'(N_CH - 1)) begin
                ph <= P_END;
              end else begin
                ch <= ch + 1'b1; ph <= P_HDR; idx <= '0;
              end
              default: ;
            endcase
          end
          if (ph == P_END && cnt_a == '0) begin
            st     <= S_ACK;
            ro_ack <= 1'b1;
          end
        end
        S_ACK: if (!req_s2) begin
          ro_ack <= 1'b0;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule

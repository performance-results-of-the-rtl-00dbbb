// buffer_manager: write control of the analog memory and derandomizer.
//
// The 256 cells of every channel are split into blocks of 32 (8 blocks), 64
// (4 blocks) or 256 cells (1 block). All 64 channels share this controller,
// so they write the same cell in the same cycle. One block at a time is the
// sampling block: its cells are written in a circle at the 200 MHz clock
// (wr_en, wr_addr), so it always holds the last block-length of samples.
//
// When the event controller reports t_S (ts_strobe), the cell written in that
// cycle is remembered and the block keeps sampling for half a block more (the
// t_S sample plus 15 for 32 cells), then it is frozen. For 32 cells at 5 ns
// the block then holds t_S-80 ns .. t_S+75 ns, i.e. the waveform is centred on
// t_S as in the paper. Sampling moves at once to another free block. If none
// is free, sampling stops (mem_full) and an event seen meanwhile has no data
// (data_ok low): only its hitmap goes out, as the paper describes.
//
// The FPGA decision arrives as evt_accept or evt_release. Accept starts the
// conversion chain of the block (block i uses chain i, eight chains in all);
// release frees it. A decision that arrives before the block is frozen is kept
// and applied at the freeze. Converted blocks are queued in acceptance order
// for the serializer, which is asked with a four-phase ro_req/ro_ack handshake
// (ro_ack comes from the 400 MHz domain and is synchronized here); the block
// is freed when ro_ack falls. A change of segmentation restarts the memory.
// The FIFO order, the handshake and the restart are choices of this design.
module buffer_manager
  import mizar_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  seg_mode_e          seg,
  input  logic [3:0]         adc_bits,
  input  logic               ts_strobe,
  input  logic               evt_accept,
  input  logic               evt_release,
  input  logic [NCH-1:0]     evt_hit_hi,
  output logic               data_ok,
  output logic               wr_en,
  output logic [CELL_AW-1:0] wr_addr,
  output logic [NBLK-1:0]    conv_start,
  input  logic [NBLK-1:0]    conv_done,
  output logic               ro_req,
  output ro_info_t           ro_info,
  input  logic               ro_ack,
  output logic               mem_full,
  output logic [NBLK-1:0]    blk_busy
);

  blk_state_e                 bst [NBLK];
  logic [CELL_AW-1:0]         b_first [NBLK];
  logic [CELL_AW-1:0]         b_ts    [NBLK];
  logic [15:0]                b_evt   [NBLK];
  logic [NCH-1:0]             b_hit   [NBLK];

  logic                       sampling;
  logic [BLK_AW-1:0]          cur;
  logic [CELL_AW-1:0]         off;        // write offset inside the block
  logic [CELL_AW-1:0]         post_left;
  logic                       evt_has;    // current event owns a block
  logic [BLK_AW-1:0]          evt_blk;
  logic [1:0]                 pend;       // 01 accept, 10 release, before freeze
  logic [15:0]                evt_cnt;
  seg_mode_e                  seg_q;

  // readout queue
  logic [BLK_AW-1:0]          q_mem [NBLK];
  logic [BLK_AW:0]            q_wp, q_rp;
  typedef enum logic [1:0] {RO_IDLE, RO_REQ, RO_DROP} ro_e;
  ro_e                        ro_st;
  logic [BLK_AW-1:0]          ro_blk;
  logic                       ack_s1, ack_s2;

  logic [CELL_AW:0]           bc;         // cells per block
  logic [BLK_AW:0]            nb;         // blocks in use
  logic [CELL_AW-1:0]         base;
  logic                       free_found;
  logic [BLK_AW-1:0]          free_idx;
  logic                       freeze_now;

  always_comb begin
    bc   = (CELL_AW+1)'(blk_cells(seg));
    nb   = (BLK_AW+1)'(n_blocks(seg));
    base = CELL_AW'(int'(cur) * int'(bc));
  end

  // Next free block after 'cur', round robin over the blocks in use.
  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    for (int i = 1; i <= NBLK; i++) begin
      logic [BLK_AW-1:0] idx;
      idx = BLK_AW'((int'(cur) + i) % int'(nb));
      if (!free_found && i <= int'(nb) && bst[idx] == BLK_FREE) begin
        free_found = 1'b1;
        free_idx   = idx;
      end
    end
  end

  assign freeze_now = sampling && bst[cur] == BLK_POST && post_left == '0;
  assign wr_en      = sampling && (bst[cur] == BLK_SAMPLING ||
                                   (bst[cur] == BLK_POST && post_left != '0));
  assign wr_addr    = base + off;
  assign mem_full   = !sampling;
  assign data_ok    = evt_has;

  always_comb
    for (int i = 0; i < NBLK; i++) blk_busy[i] = (bst[i] != BLK_FREE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NBLK; i++) begin
        bst[i]     <= BLK_FREE;
        b_first[i] <= '0;
        b_ts[i]    <= '0;
        b_evt[i]   <= '0;
        b_hit[i]   <= '0;
        q_mem[i]   <= '0;
      end
      bst[0]     <= BLK_SAMPLING;
      sampling   <= 1'b1;
      cur        <= '0;
      off        <= '0;
      post_left  <= '0;
      evt_has    <= 1'b0;
      evt_blk    <= '0;
      pend       <= '0;
      evt_cnt    <= '0;
      seg_q      <= SEG_32;
      conv_start <= '0;
      q_wp       <= '0;
      q_rp       <= '0;
      ro_st      <= RO_IDLE;
      ro_blk     <= '0;
      ro_req     <= 1'b0;
      ack_s1     <= 1'b0;
      ack_s2     <= 1'b0;
    end else begin
      conv_start <= '0;
      ack_s1     <= ro_ack;
      ack_s2     <= ack_s1;
      seg_q      <= seg;

      // ---- sampler -------------------------------------------------------
      if (wr_en)
        off <= (off + 1'b1) & CELL_AW'(bc - 1'b1);
      if (sampling && bst[cur] == BLK_POST && post_left != '0)
        post_left <= post_left - 1'b1;

      if (ts_strobe) begin
        if (sampling && bst[cur] == BLK_SAMPLING) begin
          bst[cur]    <= BLK_POST;
          b_ts[cur]   <= wr_addr;
          post_left   <= CELL_AW'(bc >> 1) - 1'b1;
          evt_has     <= 1'b1;
          evt_blk     <= cur;
        end else begin
          evt_has     <= 1'b0;
        end
        pend <= '0;
      end

      if (freeze_now) begin
        b_first[cur] <= off;
        if (pend == 2'b01) begin
          bst[cur]        <= BLK_CONV;
          conv_start[cur] <= 1'b1;
        end else if (pend == 2'b10) begin
          bst[cur] <= BLK_FREE;
        end else begin
          bst[cur] <= BLK_HELD;
        end
        pend <= '0;
        if (free_found) begin
          cur           <= free_idx;
          bst[free_idx] <= BLK_SAMPLING;
          off           <= '0;
        end else begin
          sampling <= 1'b0;
        end
      end else if (!sampling && free_found) begin
        cur           <= free_idx;
        bst[free_idx] <= BLK_SAMPLING;
        off           <= '0;
        sampling      <= 1'b1;
      end

      // ---- FPGA decision ---------------------------------------------------
      if ((evt_accept || evt_release) && evt_has) begin
        evt_has <= 1'b0;
        if (evt_accept) begin
          b_evt[evt_blk] <= evt_cnt;
          b_hit[evt_blk] <= evt_hit_hi;
          evt_cnt        <= evt_cnt + 1'b1;
        end
        if (bst[evt_blk] == BLK_HELD || (freeze_now && cur == evt_blk)) begin
          if (evt_accept) begin
            bst[evt_blk]        <= BLK_CONV;
            conv_start[evt_blk] <= 1'b1;
          end else begin
            bst[evt_blk] <= BLK_FREE;
          end
        end else begin
          pend <= evt_accept ? 2'b01 : 2'b10;
        end
      end

      // ---- conversion done -> readout queue --------------------------------
      for (int i = 0; i < NBLK; i++) begin
        if (conv_done[i] && bst[i] == BLK_CONV) begin
          bst[i] <= BLK_READQ;
        end
      end
      begin
        logic [BLK_AW:0] wp;
        wp = q_wp;
        for (int i = 0; i < NBLK; i++) begin
          if (conv_done[i] && bst[i] == BLK_CONV) begin
            q_mem[wp[BLK_AW-1:0]] <= BLK_AW'(i);
            wp = wp + 1'b1;
          end
        end
        q_wp <= wp;
      end

      // ---- readout handshake -------------------------------------------------
      case (ro_st)
        RO_IDLE: if (q_wp != q_rp) begin
          ro_blk      <= q_mem[q_rp[BLK_AW-1:0]];
          bst[q_mem[q_rp[BLK_AW-1:0]]] <= BLK_READ;
          q_rp        <= q_rp + 1'b1;
          ro_req      <= 1'b1;
          ro_st       <= RO_REQ;
        end
        RO_REQ: if (ack_s2) begin
          ro_req <= 1'b0;
          ro_st  <= RO_DROP;
        end
        RO_DROP: if (!ack_s2) begin
          bst[ro_blk] <= BLK_FREE;
          ro_st       <= RO_IDLE;
        end
        default: ro_st <= RO_IDLE;
      endcase

      // ---- segmentation change: restart the memory ---------------------------
      if (seg != seg_q) begin
        for (int i = 0; i < NBLK; i++) bst[i] <= BLK_FREE;
        bst[0]   <= BLK_SAMPLING;
        cur      <= '0;
        off      <= '0;
        sampling <= 1'b1;
        evt_has  <= 1'b0;
        pend     <= '0;
        q_wp     <= '0;
        q_rp     <= '0;
        ro_st    <= RO_IDLE;
        ro_req   <= 1'b0;
      end
    end
  end

  always_comb begin
    ro_info.blk        = ro_blk;
    ro_info.first_cell = b_first[ro_blk];
    ro_info.ts_cell    = b_ts[ro_blk];
    ro_info.evt_id     = b_evt[ro_blk];
    ro_info.hit_hi     = b_hit[ro_blk];
    ro_info.seg        = seg;
    ro_info.adc_bits   = clamp_bits(adc_bits);
  end

endmodule

// trigger_ctrl: chip-level event controller between the 64 channel triggers,
// the memory buffer manager and the FPGA.
//
// The first channel crossing of an event gives t_S: a one-cycle ts_strobe goes
// to the buffer manager, which centres the stored waveform on it. Once no
// channel has an open validation window, the high and low flags of all
// channels are sent to the FPGA as two 64-bit hitmaps with a one-cycle hm_valid
// (hm_data says whether a memory block holds the event). The controller then
// waits for fpga_accept or fpga_reject. Accept gives evt_accept, reject gives
// evt_release; if no answer comes within fpga_tmo cycles (80 ns by default)
// the event is released as well and counted as a time-out. In every case the
// channels are cleared and the chip resumes monitoring. These three decision
// paths follow the paper; the parallel hitmap link and the one-event-at-a-time
// policy are choices of this design.
//
// Timing: ts_strobe one cycle after the first 'xing'; hm_valid one cycle after
// the last window closes, but at least two cycles after ts_strobe, when the
// buffer manager's data_ok for this event is valid; clear one cycle after the
// answer or the time-out.
module trigger_ctrl
  import mizar_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NCH-1:0] xing,
  input  logic [NCH-1:0] pending,
  input  logic [NCH-1:0] hit_hi,
  input  logic [NCH-1:0] hit_lo,
  input  logic [7:0]     fpga_tmo,
  input  logic           data_ok,      // buffer manager has a block for this event
  input  logic           fpga_accept,
  input  logic           fpga_reject,
  output logic           ts_strobe,
  output logic           hm_valid,
  output logic [NCH-1:0] hm_hi,
  output logic [NCH-1:0] hm_lo,
  output logic           hm_data,
  output logic           evt_accept,
  output logic           evt_release,
  output logic           evt_timeout,
  output logic           clear,
  output logic           busy
);

  typedef enum logic [1:0] {ARMED, COLLECT, WAIT_FPGA, CLOSE} st_e;
  st_e        st;
  logic [7:0] tmo_cnt;

  assign busy = (st != ARMED);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= ARMED;
      tmo_cnt     <= '0;
      ts_strobe   <= 1'b0;
      hm_valid    <= 1'b0;
      hm_hi       <= '0;
      hm_lo       <= '0;
      hm_data     <= 1'b0;
      evt_accept  <= 1'b0;
      evt_release <= 1'b0;
      evt_timeout <= 1'b0;
      clear       <= 1'b0;
    end else begin
      ts_strobe   <= 1'b0;
      hm_valid    <= 1'b0;
      evt_accept  <= 1'b0;
      evt_release <= 1'b0;
      evt_timeout <= 1'b0;
      clear       <= 1'b0;
      case (st)
        ARMED: begin
          if (|xing) begin
            ts_strobe <= 1'b1;
            st        <= COLLECT;
          end
        end
        COLLECT: begin
          // not in the ts_strobe cycle: data_ok is valid one cycle later
          if (!ts_strobe && pending == '0 && (|(hit_hi | hit_lo))) begin
            hm_valid <= 1'b1;
            hm_hi    <= hit_hi;
            hm_lo    <= hit_lo;
            hm_data  <= data_ok;
            tmo_cnt  <= '0;
            st       <= WAIT_FPGA;
          end
        end
        WAIT_FPGA: begin
          if (fpga_accept) begin
            evt_accept <= 1'b1;
            clear      <= 1'b1;
            st         <= CLOSE;
          end else if (fpga_reject) begin
            evt_release <= 1'b1;
            clear       <= 1'b1;
            st          <= CLOSE;
          end else if (tmo_cnt + 1'b1 >= fpga_tmo) begin
            evt_release <= 1'b1;
            evt_timeout <= 1'b1;
            clear       <= 1'b1;
            st          <= CLOSE;
          end else begin
            tmo_cnt <= tmo_cnt + 1'b1;
          end
        end
        CLOSE: st <= ARMED;   // channels see 'clear' this cycle
        default: st <= ARMED;
      endcase
    end
  end

  // The FPGA must not accept and reject the same event.
  a_one_answer: assert property (@(posedge clk) disable iff (!rst_n)
    !(fpga_accept && fpga_reject));

endmodule

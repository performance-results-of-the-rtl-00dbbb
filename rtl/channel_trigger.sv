// channel_trigger: two-threshold trigger logic of one channel.
//
// Each channel has a low and a high discriminator. A rising edge of the low
// discriminator marks t_S (one-cycle 'xing' pulse) and starts a programmable
// counter that opens a validation window of win_len samples. If the high
// discriminator rises while the window is open, only the high trigger is
// forwarded (hit_hi, at once); if the window runs out without it, the low
// trigger is forwarded (hit_lo). This follows the paper. The forwarded flag is
// held until 'clear' (the chip closes the event), which re-arms the channel.
//
// Choices of this design: discriminators are sampled by the 200 MHz clock and
// edges are found against the previous sample; a high edge with no low edge
// before it counts as a crossing and a high trigger in the same cycle.
//
// Timing: xing and hit_hi one cycle after the discriminator edge is sampled;
// hit_lo win_len cycles after xing. 'pending' is high while the window is open.
module channel_trigger #(
  parameter int WIN_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             disc_lo,
  input  logic             disc_hi,
  input  logic [WIN_W-1:0] win_len,
  input  logic             clear,
  output logic             xing,
  output logic             pending,
  output logic             hit_hi,
  output logic             hit_lo
);

  typedef enum logic [1:0] {IDLE, WINDOW, HELD} st_e;
  st_e             st;
  logic [WIN_W-1:0] cnt;
  logic            lo_q, hi_q;
  logic            lo_rise, hi_rise;

  assign lo_rise = disc_lo & ~lo_q;
  assign hi_rise = disc_hi & ~hi_q;
  assign pending = (st == WINDOW);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= IDLE;
      cnt    <= '0;
      lo_q   <= 1'b0;
      hi_q   <= 1'b0;
      xing  <= 1'b0;
      hit_hi <= 1'b0;
      hit_lo <= 1'b0;
    end else begin
      lo_q  <= disc_lo;
      hi_q  <= disc_hi;
      xing <= 1'b0;
      case (st)
        IDLE: begin
          if (lo_rise || hi_rise) begin
            xing <= 1'b1;
            cnt   <= '0;
            if (hi_rise) begin
              hit_hi <= 1'b1;
              st     <= HELD;
            end else begin
              st     <= WINDOW;
            end
          end
        end
        WINDOW: begin
          if (hi_rise) begin
            hit_hi <= 1'b1;
            st     <= HELD;
          end else if (cnt + 1'b1 >= win_len) begin
            hit_lo <= 1'b1;
            st     <= HELD;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: ;
      endcase
      if (clear) begin
        st     <= IDLE;
        hit_hi <= 1'b0;
        hit_lo <= 1'b0;
      end
    end
  end

endmodule

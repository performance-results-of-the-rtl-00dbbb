// wilkinson_counter: digital half of one conversion chain of the Wilkinson
// (single-slope) ADC.
//
// Every cell of a block holds its sample on a capacitor; during conversion a
// common ramp is applied and each cell's comparator fires when the ramp passes
// its sample. This module runs the ramp (ramp_en) and a counter that all cells
// of the block share: on 'start' it counts 0 .. 2^N-1 at the 200 MHz clock,
// N = adc_bits (8 to 12, clamped), and pulses 'done' after the last count. A
// cell latches the count at which its comparator fires, which is its code.
// The conversion time 2^N clock periods (4096 x 5 ns = 20.48 us at 12 bits)
// is the paper's; the plain binary count is a choice of this design.
//
// Timing: count = 0 with ramp_en high in the cycle after 'start'; the last
// count 2^N-1 is held for one cycle with 'last' high; 'done' is a one-cycle
// pulse in the cycle after that, 2^N cycles after ramp_en rose.
module wilkinson_counter #(
  parameter int MAXB = 12
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [3:0]      adc_bits,
  output logic [MAXB-1:0] count,
  output logic            ramp_en,
  output logic            last,
  output logic            done
);

  logic [3:0]      nb;
  logic [MAXB-1:0] top;

  always_comb begin
    nb = adc_bits;
    if (nb < 4'd8) nb = 4'd8;
    if (int'(nb) > MAXB) nb = 4'(MAXB);
    top = MAXB'((1 << nb) - 1);
  end

  assign last = ramp_en && (count == top);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count   <= '0;
      ramp_en <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !ramp_en) begin
        ramp_en <= 1'b1;
        count   <= '0;
      end else if (ramp_en) begin
        if (last) begin
          ramp_en <= 1'b0;
          done    <= 1'b1;
        end else begin
          count <= count + 1'b1;
        end
      end
    end
  end

endmodule

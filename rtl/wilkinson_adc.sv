// wilkinson_adc: counting half of a Wilkinson ADC.
//
// A Wilkinson converter discharges a held voltage (here: a sample-and-hold
// capacitor or a time-interpolator capacitor) with a constant current; a
// comparator stays high while the voltage is above the reference, so the
// length of its high pulse is proportional to the input.  This module counts
// that length in clock cycles.  `start` (one cycle) begins a conversion; every
// clock edge at which `cmp` is high adds one.  The conversion ends at the
// first low `cmp` after a high one, or when the count reaches 2^ADC_BITS-1
// (saturation).  If `cmp` never rises within 2^ADC_BITS cycles the result is
// 0.  `done` pulses for one cycle with `code` valid from then on until the next
// start.  The 10-bit resolution follows the chip; counting at the system
// clock and the time-out rule are choices of this design.
module wilkinson_adc #(
  parameter int unsigned ADC_BITS = 10
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                cmp,
  output logic                busy,
  output logic                done,
  output logic [ADC_BITS-1:0] code
);
  localparam logic [ADC_BITS-1:0] MAXC = '1;

  logic                seen_high;
  logic [ADC_BITS:0]   wait_cnt;   // cycles waited for the comparator to rise

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      code      <= '0;
      seen_high <= 1'b0;
      wait_cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        code      <= '0;
        seen_high <= 1'b0;
        wait_cnt  <= '0;
      end else if (busy) begin
        if (cmp) begin
          seen_high <= 1'b1;
          code      <= code + 1'b1;
          if (code + 1'b1 == MAXC) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end else if (seen_high) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          wait_cnt <= wait_cnt + 1'b1;
          if (wait_cnt == {1'b0, MAXC}) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end
endmodule

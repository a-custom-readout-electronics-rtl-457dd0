// calib_pulse: digital part of the on-chip calibration circuit.
//
// A rising edge on tp_in starts a test pulse that lasts tp_len+1 clocks; it is
// sent to every channel whose test-pulse enable bit is set, where it steps the
// charge-injection capacitor (an analogue circuit whose amplitude is set by a
// DAC code outside this block).  A new request while a pulse is running is
// ignored.  tp_out is registered: it rises one clock after the tp_in edge.
// Programmable test pulses per channel follow the chip; the length field and
// edge trigger are this design's choices.
module calib_pulse #(
  parameter int unsigned N_CH = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            tp_in,
  input  logic [7:0]      tp_len,
  input  logic [N_CH-1:0] tp_en,
  output logic [N_CH-1:0] tp_out
);
  logic       tp_in_q, on;
  logic [7:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tp_in_q <= 1'b0;
      on      <= 1'b0;
      cnt     <= '0;
    end else begin
      tp_in_q <= tp_in;
      if (!on && tp_in && !tp_in_q) begin
        on  <= 1'b1;
        cnt <= tp_len;
      end else if (on) begin
        if (cnt == '0) on <= 1'b0;
        else           cnt <= cnt - 1'b1;
      end
    end
  end

  assign tp_out = on ? tp_en : '0;
endmodule

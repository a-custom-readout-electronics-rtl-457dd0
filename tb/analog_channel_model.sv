// analog_channel_model: behavioural model of the analogue side of one channel
// as seen by the conversion logic (no logic function of its own).
//
// It stands for the time interpolators, the sample-and-hold capacitors and
// the Wilkinson ramp comparators.  The testbench stores, per buffer, the ramp
// length each conversion should produce (t_len, e_len: the discharge time in
// clock cycles of the T interpolator and of the E interpolator / S&H
// capacitor).  When t_conv (e_conv) is seen at a clock edge, the matching
// comparator rises two clocks later and stays high for that many clocks.
module analog_channel_model (
  input  logic             clk,
  input  logic             t_conv,
  input  logic             e_conv,
  input  logic [1:0]       conv_slot,
  input  logic [3:0][10:0] t_len,
  input  logic [3:0][10:0] e_len,
  output logic             t_cmp,
  output logic             e_cmp
);
  int t_left = 0, e_left = 0, t_wait = 0, e_wait = 0;

  initial begin
    t_cmp = 1'b0;
    e_cmp = 1'b0;
  end

  always @(posedge clk) begin
    if (t_conv) begin t_wait = 2; t_left = int'(t_len[conv_slot]); end
    if (e_conv) begin e_wait = 2; e_left = int'(e_len[conv_slot]); end
    if (t_wait > 0) begin t_wait--; t_cmp <= 1'b0; end
    else if (t_left > 0) begin t_left--; t_cmp <= 1'b1; end
    else t_cmp <= 1'b0;
    if (e_wait > 0) begin e_wait--; e_cmp <= 1'b0; end
    else if (e_left > 0) begin e_left--; e_cmp <= 1'b1; end
    else e_cmp <= 1'b0;
  end
endmodule

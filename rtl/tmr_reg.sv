// tmr_reg: triple-modular-redundant register for finite-state-machine state.
//
// Three copies of the register are loaded with the same next value and the
// output is their bitwise 2-of-3 majority.  Since the next value is always
// computed from the voted output, an upset that flips one copy is outvoted at
// once and overwritten at the next clock edge.  This is the single-event-upset
// protection that the chip applies to its FSMs; how the voter is built is this
// design's choice.  Interface: d/q of width W, synchronous load every cycle,
// asynchronous active-low reset to RST_VAL.  Latency one clock, like a plain
// register.
module tmr_reg #(
  parameter int unsigned     W       = 4,
  parameter logic [W-1:0]    RST_VAL = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] r0, r1, r2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r0 <= RST_VAL;
      r1 <= RST_VAL;
      r2 <= RST_VAL;
    end else begin
      r0 <= d;
      r1 <= d;
      r2 <= d;
    end
  end

  assign q = (r0 & r1) | (r0 & r2) | (r1 & r2);
endmodule

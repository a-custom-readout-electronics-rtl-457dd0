// event_arbiter: round-robin arbiter over the channel event requests.
//
// Each cycle it grants the first requesting channel after the one granted
// last (wrapping), so every channel with a pending event is served within
// N_CH grants.  gnt is one-hot, gnt_idx its index, gnt_valid says a grant
// exists; the pointer only moves when `advance` confirms the grant was used.
// Purely combinational grant, registered pointer.  The back-end of the chip
// collects the channel data; round-robin is this design's choice.
module event_arbiter #(
  parameter int unsigned N_CH = 64,
  localparam int unsigned IW  = $clog2(N_CH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_CH-1:0] req,
  input  logic            advance,
  output logic [N_CH-1:0] gnt,
  output logic [IW-1:0]   gnt_idx,
  output logic            gnt_valid
);
  logic [IW-1:0] last;

  always_comb begin
    gnt       = '0;
    gnt_idx   = '0;
    gnt_valid = 1'b0;
    for (int k = 1; k <= N_CH; k++) begin
      logic [IW-1:0] c;
      c = IW'((int'(last) + k) % N_CH);
      if (!gnt_valid && req[c]) begin
        gnt_valid = 1'b1;
        gnt_idx   = c;
      end
    end
    if (gnt_valid) gnt[gnt_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     last <= IW'(N_CH - 1);
    else if (advance && gnt_valid)  last <= gnt_idx;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    gnt_valid |-> $onehot(gnt));
endmodule

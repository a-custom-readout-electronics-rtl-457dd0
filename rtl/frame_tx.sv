// frame_tx: back-end transmit controller.
//
// Takes events from the event FIFO and turns them into a stream of 8b/10b
// characters striped over the active links.  A frame is the start character
// K27.7 followed by the 8 bytes of the 64-bit event, most significant byte
// first: 9 characters.  Every symbol period the controller emits one character
// per link, at `sym_tick`.  The period follows the line rate of the links:
// 10 clocks at 1 bit per clock, 5 at 2, and 2.5 at 4 bits per clock, made by
// alternating gaps of 3 and 2 clocks.  At each tick link j gets frame
// character pos+j, and links past the frame end, links outside the active set
// and all links when there is no event carry the K28.5 idle comma.  A frame
// therefore takes 9, 5 or 3 symbol periods on 1, 2 or 4 links.  The event is
// popped in the period that sends its last character.  The frame state is held
// in a triplicated register (tmr_reg).  The lane outputs are combinational and
// valid while sym_tick is high.  Framing and striping are this design's
// choices; the chip only specifies 8b/10b on up to four SDR/DDR links.
module frame_tx
  import tiger_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [EV_W-1:0] ev,
  input  logic            ev_valid,
  output logic            ev_pop,
  input  logic [1:0]      n_links,   // 0: 1, 1: 2, 2/3: 4 links
  input  logic [1:0]      rate,      // 0: 1, 1: 2, 2: 4 line bits per clock
  output logic            sym_tick,
  output logic [3:0][7:0] lane_data,
  output logic [3:0]      lane_k
);
  localparam int unsigned FRAME_LEN = 9;

  logic [3:0] div;
  logic [4:0] st_d, st_q;           // {active, pos[3:0]}
  logic       active;
  logic [3:0] pos, cur;
  int unsigned nl;
  logic       sending;

  tmr_reg #(.W(5)) u_state (.clk, .rst_n, .d(st_d), .q(st_q));
  assign active = st_q[4];
  assign pos    = st_q[3:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                     div <= '0;
    else if (div >= ((rate == 2'd0) ? 4'd9 : 4'd4)) div <= '0;
    else                                            div <= div + 1'b1;
  end
  assign sym_tick = (div == '0) || (rate >= 2'd2 && div == 4'd3);

  always_comb begin
    nl      = (n_links == 2'd0) ? 1 : (n_links == 2'd1) ? 2 : 4;
    sending = active || ev_valid;
    cur     = active ? pos : 4'd0;
    for (int j = 0; j < 4; j++) begin
      int unsigned p;
      p = int'(cur) + j;
      lane_data[j] = K28_5;
      lane_k[j]    = 1'b1;
      if (sending && j < nl && p < FRAME_LEN) begin
        if (p == 0) begin
          lane_data[j] = K27_7;
        end else begin
          lane_data[j] = ev[EV_W-1-8*(p-1) -: 8];
          lane_k[j]    = 1'b0;
        end
      end
    end
    st_d        = st_q;
    ev_pop      = 1'b0;
    if (sym_tick && sending) begin
      if (int'(cur) + nl >= FRAME_LEN) begin
        st_d   = '0;
        ev_pop = 1'b1;
      end else begin
        st_d   = {1'b1, 4'(int'(cur) + nl)};
      end
    end
  end

  a_pop_valid: assert property (@(posedge clk) ev_pop |-> ev_valid);
endmodule

// serializer: 10-bit symbol to line gearbox of one output link.
//
// The link is driven by an output stage that sends four line bits per system
// clock period (640 Mb/s at 160 MHz: a 320 MHz double-data-rate pad, outside
// this RTL).  tx_bits[3] leaves first, tx_bits[0] last.  Lower line rates are
// made by repeating bits:
//   rate 0: 1 bit per clock, each bit repeated 4 times  (160 Mb/s, SDR at 160 MHz)
//   rate 1: 2 bits per clock, each bit repeated twice   (320 Mb/s, DDR at 160 MHz
//                                                         or SDR at 320 MHz)
//   rate 2: 4 bits per clock                            (640 Mb/s, DDR at 320 MHz)
// `load` appends a symbol (bit 9 first) to a bit buffer that is drained at the
// line rate.  Symbols must come on average every 10, 5 or 2.5 clocks (frame_tx
// paces them).  After reset or a rate change, the output waits until two symbols
// are buffered (tx_bits = 0 until then) and then runs without gaps.  tx_bits is
// registered.  SDR/DDR operation and the 640 Mb/s maximum follow the chip; the
// bit-repetition scheme and the buffer are this design's choices.
module serializer (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] rate,
  input  logic       load,
  input  logic [9:0] sym,
  output logic [3:0] tx_bits
);
  logic [31:0] buf_q;       // valid bits left-aligned, bit 31 leaves first
  logic [5:0]  cnt;
  logic        primed;
  logic [1:0]  rate_q;

  logic [31:0] buf_a;
  logic [5:0]  avail;
  logic [5:0]  nb;

  always_comb begin
    nb    = (rate == 2'd0) ? 6'd1 : (rate == 2'd1) ? 6'd2 : 6'd4;
    buf_a = buf_q;
    avail = cnt;
    if (load) begin
      buf_a = buf_q | ({sym, 22'b0} >> cnt);
      avail = cnt + 6'd10;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q   <= '0;
      cnt     <= '0;
      primed  <= 1'b0;
      rate_q  <= '0;
      tx_bits <= '0;
    end else begin
      rate_q <= rate;
      if (rate != rate_q) begin
        buf_q   <= '0;
        cnt     <= '0;
        primed  <= 1'b0;
        tx_bits <= '0;
      end else if (primed || avail >= 6'd20) begin
        primed <= 1'b1;
        case (rate)
          2'd0:    tx_bits <= {4{buf_a[31]}};
          2'd1:    tx_bits <= {{2{buf_a[31]}}, {2{buf_a[30]}}};
          default: tx_bits <= buf_a[31:28];
        endcase
        buf_q <= buf_a << nb;
        cnt   <= avail - nb;
      end else begin
        buf_q   <= buf_a;
        cnt     <= avail;
        tx_bits <= '0;
      end
    end
  end

  a_no_underrun: assert property (@(posedge clk) disable iff (!rst_n)
    primed && rate == rate_q |-> avail >= nb);
  a_no_overrun:  assert property (@(posedge clk) disable iff (!rst_n) avail <= 6'd32);
endmodule

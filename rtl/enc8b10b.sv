// enc8b10b: 8b/10b line encoder with running disparity.
//
// Implements the standard IBM / IEEE 802.3 code: the five low bits EDCBA are
// mapped by the 5b/6b table, the three high bits HGF by the 3b/4b table
// (with the alternate D.x.A7 code where needed to avoid runs of five), and
// the code or its complement is picked from the running disparity so that the
// line stays DC balanced.  Control characters K28.y and Kx.7 (x = 23, 27, 29,
// 30) are supported.  The output word is abcdei_fghj with bit 9 = a, the bit
// sent first.  When `en` is high the symbol for {k, din} appears on dout at the
// next clock edge and the running disparity (rd, 1 = positive) is updated;
// reset sets it negative.  Using 8b/10b on the data links follows the chip.
module enc8b10b (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       k,
  input  logic [7:0] din,
  output logic [9:0] dout,
  output logic       rd
);
  // 5b/6b codes for negative running disparity, abcdei with a as bit 5.
  function automatic logic [5:0] tbl6(input logic [4:0] x);
    case (x)
      5'd0:  return 6'b100111;  5'd1:  return 6'b011101;
      5'd2:  return 6'b101101;  5'd3:  return 6'b110001;
      5'd4:  return 6'b110101;  5'd5:  return 6'b101001;
      5'd6:  return 6'b011001;  5'd7:  return 6'b111000;
      5'd8:  return 6'b111001;  5'd9:  return 6'b100101;
      5'd10: return 6'b010101;  5'd11: return 6'b110100;
      5'd12: return 6'b001101;  5'd13: return 6'b101100;
      5'd14: return 6'b011100;  5'd15: return 6'b010111;
      5'd16: return 6'b011011;  5'd17: return 6'b100011;
      5'd18: return 6'b010011;  5'd19: return 6'b110010;
      5'd20: return 6'b001011;  5'd21: return 6'b101010;
      5'd22: return 6'b011010;  5'd23: return 6'b111010;
      5'd24: return 6'b110011;  5'd25: return 6'b100110;
      5'd26: return 6'b010110;  5'd27: return 6'b110110;
      5'd28: return 6'b001110;  5'd29: return 6'b101110;
      5'd30: return 6'b011110;  default: return 6'b101011;
    endcase
  endfunction

  // 3b/4b codes for negative running disparity, fghj with f as bit 3.
  function automatic logic [3:0] tbl4d(input logic [2:0] y);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b1001;
      3'd2: return 4'b0101;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b1010;
      3'd6: return 4'b0110;  default: return 4'b1110;   // P7
    endcase
  endfunction

  function automatic logic [3:0] tbl4k(input logic [2:0] y);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b0110;
      3'd2: return 4'b1010;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b0101;
      3'd6: return 4'b1001;  default: return 4'b0111;
    endcase
  endfunction

  function automatic int ones6(input logic [5:0] v);
    return int'(v[0]) + int'(v[1]) + int'(v[2]) + int'(v[3]) + int'(v[4]) + int'(v[5]);
  endfunction
  function automatic int ones4(input logic [3:0] v);
    return int'(v[0]) + int'(v[1]) + int'(v[2]) + int'(v[3]);
  endfunction

  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] c6;
  logic [3:0] c4;
  logic       rd6, rd_next;

  always_comb begin
    x = din[4:0];
    y = din[7:5];
    // 6b sub-block
    c6 = (k && x == 5'd28) ? 6'b001111 : tbl6(x);
    if (rd && (ones6(c6) != 3 || x == 5'd7)) c6 = ~c6;
    rd6 = (ones6(c6) > 3) ? 1'b1 : (ones6(c6) < 3) ? 1'b0 : rd;
    // 4b sub-block
    if (k) begin
      c4 = tbl4k(y);
      if (rd6) c4 = ~c4;
    end else begin
      c4 = tbl4d(y);
      if (y == 3'd7 && ((!rd6 && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
                        ( rd6 && (x == 5'd11 || x == 5'd13 || x == 5'd14))))
        c4 = 4'b0111;                                          // A7
      if (rd6 && (ones4(c4) != 2 || y == 3'd3)) c4 = ~c4;
    end
    rd_next = (ones4(c4) > 2) ? 1'b1 : (ones4(c4) < 2) ? 1'b0 : rd6;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd   <= 1'b0;
      dout <= 10'b0011111010;   // K28.5, RD-
    end else if (en) begin
      rd   <= rd_next;
      dout <= {c6, c4};
    end
  end
endmodule

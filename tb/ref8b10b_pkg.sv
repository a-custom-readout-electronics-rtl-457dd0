// ref8b10b_pkg: reference 8b/10b code for the testbenches.
//
// Written from the published code tables as explicit (RD-, RD+) pairs, not
// by the complement rules the encoder uses, so that the encoder can be checked
// against it.  Provides encode (with running disparity) and decode (table
// search) of data and K characters.
package ref8b10b_pkg;

  // 5b/6b: {RD- code, RD+ code}, abcdei
  function automatic logic [11:0] t6(input int x);
    case (x)
      0: return {6'b100111, 6'b011000};  1: return {6'b011101, 6'b100010};
      2: return {6'b101101, 6'b010010};  3: return {6'b110001, 6'b110001};
      4: return {6'b110101, 6'b001010};  5: return {6'b101001, 6'b101001};
      6: return {6'b011001, 6'b011001};  7: return {6'b111000, 6'b000111};
      8: return {6'b111001, 6'b000110};  9: return {6'b100101, 6'b100101};
      10: return {6'b010101, 6'b010101}; 11: return {6'b110100, 6'b110100};
      12: return {6'b001101, 6'b001101}; 13: return {6'b101100, 6'b101100};
      14: return {6'b011100, 6'b011100}; 15: return {6'b010111, 6'b101000};
      16: return {6'b011011, 6'b100100}; 17: return {6'b100011, 6'b100011};
      18: return {6'b010011, 6'b010011}; 19: return {6'b110010, 6'b110010};
      20: return {6'b001011, 6'b001011}; 21: return {6'b101010, 6'b101010};
      22: return {6'b011010, 6'b011010}; 23: return {6'b111010, 6'b000101};
      24: return {6'b110011, 6'b001100}; 25: return {6'b100110, 6'b100110};
      26: return {6'b010110, 6'b010110}; 27: return {6'b110110, 6'b001001};
      28: return {6'b001110, 6'b001110}; 29: return {6'b101110, 6'b010001};
      30: return {6'b011110, 6'b100001}; default: return {6'b101011, 6'b010100};
    endcase
  endfunction

  // 3b/4b data: {RD- code, RD+ code}, fghj; index 8 is A7
  function automatic logic [7:0] t4(input int y);
    case (y)
      0: return {4'b1011, 4'b0100}; 1: return {4'b1001, 4'b1001};
      2: return {4'b0101, 4'b0101}; 3: return {4'b1100, 4'b0011};
      4: return {4'b1101, 4'b0010}; 5: return {4'b1010, 4'b1010};
      6: return {4'b0110, 4'b0110}; 7: return {4'b1110, 4'b0001};
      default: return {4'b0111, 4'b1000};
    endcase
  endfunction

  // 3b/4b for K28.y: {RD- code, RD+ code}, where RD is the value before the
  // whole character (these tables list complete K28.y characters).
  function automatic logic [19:0] k28(input int y);
    case (y)
      0: return {10'b0011110100, 10'b1100001011};
      1: return {10'b0011111001, 10'b1100000110};
      2: return {10'b0011110101, 10'b1100001010};
      3: return {10'b0011110011, 10'b1100001100};
      4: return {10'b0011110010, 10'b1100001101};
      5: return {10'b0011111010, 10'b1100000101};
      6: return {10'b0011110110, 10'b1100001001};
      default: return {10'b0011111000, 10'b1100000111};
    endcase
  endfunction

  function automatic int ones(input logic [9:0] v);
    int n = 0;
    for (int i = 0; i < 10; i++) n += int'(v[i]);
    return n;
  endfunction

  // Encode; rd: 0 = negative. Returns the code and updates rd.
  function automatic logic [9:0] encode(input logic k, input logic [7:0] b, inout logic rd);
    logic [9:0] c;
    int x, y;
    logic [5:0] c6;
    logic [3:0] c4;
    logic rd6;
    x = int'(b[4:0]);
    y = int'(b[7:5]);
    if (k && x == 28) begin
      logic [19:0] kk;
      kk = k28(y);
      c = rd ? kk[9:0] : kk[19:10];
    end else if (k) begin
      // K23.7, K27.7, K29.7, K30.7: data 6b, then 1000 (RD- column) / 0111
      logic [11:0] p6;
      p6 = t6(x);
      c6 = rd ? p6[5:0] : p6[11:6];
      c = {c6, rd ? 4'b0111 : 4'b1000};
    end else begin
      logic [11:0] p6;
      logic [7:0]  p4;
      p6 = t6(x);
      c6 = rd ? p6[5:0] : p6[11:6];
      rd6 = rd;
      if (p6[11:6] != p6[5:0] && x != 7) rd6 = ~rd;
      if (y == 7 && ((!rd6 && (x == 17 || x == 18 || x == 20)) ||
                     (rd6 && (x == 11 || x == 13 || x == 14)))) p4 = t4(8);
      else p4 = t4(y);
      c4 = rd6 ? p4[3:0] : p4[7:4];
      c = {c6, c4};
    end
    if (ones(c) > 5) rd = 1'b1;
    else if (ones(c) < 5) rd = 1'b0;
    return c;
  endfunction

  // Decode by search over both running disparities. Returns {ok, k, byte}.
  function automatic logic [9:0] decode(input logic [9:0] c);
    for (int kk = 0; kk < 2; kk++)
      for (int v = 0; v < 256; v++)
        for (int r = 0; r < 2; r++) begin
          logic rdv;
          logic [9:0] e;
          int x;
          x = v & 31;
          if (kk == 1 && !(x == 28 || ((v >> 5) == 7 && (x == 23 || x == 27 || x == 29 || x == 30))))
            continue;
          rdv = r[0];
          e = encode(kk[0], 8'(v), rdv);
          if (e == c) return {1'b1, kk[0], 8'(v)};
        end
    return 10'b0;
  endfunction

endpackage

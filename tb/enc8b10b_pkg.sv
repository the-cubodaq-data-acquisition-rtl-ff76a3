// enc8b10b_pkg: reference 8b10b encoder for the testbenches.
//
// Written from the encoding direction of the standard 8b10b code tables, so
// that it checks the receiver's decoder independently. encode() returns the
// 10-bit symbol in transmission order (bit 0 = 'a', sent first) and updates
// the running disparity (rd = 1: positive).
package enc8b10b_pkg;

  // 6b codes for RD-, written abcdei
  localparam logic [5:0] T6 [32] = '{
    6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001, 6'b011001, 6'b111000,
    6'b111001, 6'b100101, 6'b010101, 6'b110100, 6'b001101, 6'b101100, 6'b011100, 6'b010111,
    6'b011011, 6'b100011, 6'b010011, 6'b110010, 6'b001011, 6'b101010, 6'b011010, 6'b111010,
    6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110, 6'b011110, 6'b101011};
  // 4b data codes for RD-, written fghj (entry 7 is the primary P7)
  localparam logic [3:0] T4D [8] = '{4'b1011, 4'b1001, 4'b0101, 4'b1100, 4'b1101, 4'b1010, 4'b0110, 4'b1110};
  // 4b control codes for RD-
  localparam logic [3:0] T4K [8] = '{4'b1011, 4'b0110, 4'b1010, 4'b1100, 4'b1101, 4'b0101, 4'b1001, 4'b0111};

  function automatic logic [9:0] encode(input logic [7:0] b, input logic k, inout logic rd);
    logic [4:0] x;
    logic [2:0] y;
    logic [5:0] c6;
    logic [3:0] c4;
    logic [9:0] s;
    x = b[4:0];
    y = b[7:5];
    if (k && x == 5'd28) c6 = 6'b001111;
    else                 c6 = T6[x];
    if ($countones(c6) != 3 || c6 == 6'b111000) begin
      if (rd) c6 = ~c6;
    end
    if ($countones(c6) != 3) rd = ~rd;
    if (k) begin
      c4 = T4K[y];
      if (rd) c4 = ~c4;
    end else begin
      c4 = T4D[y];
      if (y == 3'd7 && ((!rd && (x == 17 || x == 18 || x == 20)) || (rd && (x == 11 || x == 13 || x == 14))))
        c4 = 4'b0111;
      if ($countones(c4) != 2 || c4 == 4'b1100) begin
        if (rd) c4 = ~c4;
      end
    end
    if ($countones(c4) != 2) rd = ~rd;
    for (int i = 0; i < 6; i++) s[i] = c6[5-i];
    for (int i = 0; i < 4; i++) s[6+i] = c4[3-i];
    return s;
  endfunction

endpackage

// dec_8b10b: 8b10b symbol decoder with running-disparity check.
//
// Decodes one 10-bit symbol per in_valid strobe into a byte and a K flag,
// using the standard 8b10b code: a 6-bit sub-block (abcdei) carries the
// five low bits EDCBA and a 4-bit sub-block (fghj) the three high bits HGF.
// The running disparity is tracked across symbols; a symbol that is not in
// the code tables, or whose sub-block disparity contradicts the running
// disparity, sets out_err. After reset the running disparity is unknown: it
// is taken from the first symbol with an unbalanced sub-block (the first
// comma) and only checked from then on, so a link that was mid-stream when
// the receiver was reset does not report a false error.
//
// Interface: in_sym bit 0 is 'a', bit 5 'i', bit 6 'f', bit 9 'j' (the order
// produced by des). out_data is HGFEDCBA.
// Timing: registered, one cycle from in_valid to out_valid.
// The paper only names the decoder; the code tables are the standard 8b10b
// ones.
module dec_8b10b (
  input  logic       clk,
  input  logic       rst,
  input  logic       in_valid,
  input  logic [9:0] in_sym,
  output logic       out_valid,
  output logic [7:0] out_data,
  output logic       out_k,
  output logic       out_err
);

  // 6b sub-block, written abcdei (a is the MSB of the literal)
  function automatic logic [4:0] dec6(input logic [5:0] c, output logic ok);
    ok = 1'b1;
    unique case (c)
      6'b100111, 6'b011000: dec6 = 5'd0;
      6'b011101, 6'b100010: dec6 = 5'd1;
      6'b101101, 6'b010010: dec6 = 5'd2;
      6'b110001:            dec6 = 5'd3;
      6'b110101, 6'b001010: dec6 = 5'd4;
      6'b101001:            dec6 = 5'd5;
      6'b011001:            dec6 = 5'd6;
      6'b111000, 6'b000111: dec6 = 5'd7;
      6'b111001, 6'b000110: dec6 = 5'd8;
      6'b100101:            dec6 = 5'd9;
      6'b010101:            dec6 = 5'd10;
      6'b110100:            dec6 = 5'd11;
      6'b001101:            dec6 = 5'd12;
      6'b101100:            dec6 = 5'd13;
      6'b011100:            dec6 = 5'd14;
      6'b010111, 6'b101000: dec6 = 5'd15;
      6'b011011, 6'b100100: dec6 = 5'd16;
      6'b100011:            dec6 = 5'd17;
      6'b010011:            dec6 = 5'd18;
      6'b110010:            dec6 = 5'd19;
      6'b001011:            dec6 = 5'd20;
      6'b101010:            dec6 = 5'd21;
      6'b011010:            dec6 = 5'd22;
      6'b111010, 6'b000101: dec6 = 5'd23;
      6'b110011, 6'b001100: dec6 = 5'd24;
      6'b100110:            dec6 = 5'd25;
      6'b010110:            dec6 = 5'd26;
      6'b110110, 6'b001001: dec6 = 5'd27;
      6'b001110, 6'b001111, 6'b110000: dec6 = 5'd28;
      6'b101110, 6'b010001: dec6 = 5'd29;
      6'b011110, 6'b100001: dec6 = 5'd30;
      6'b101011, 6'b010100: dec6 = 5'd31;
      default: begin dec6 = 5'd0; ok = 1'b0; end
    endcase
  endfunction

  // 4b sub-block, written fghj
  function automatic logic [2:0] dec4(input logic [3:0] c, output logic ok);
    ok = 1'b1;
    unique case (c)
      4'b1011, 4'b0100: dec4 = 3'd0;
      4'b1001:          dec4 = 3'd1;
      4'b0101:          dec4 = 3'd2;
      4'b1100, 4'b0011: dec4 = 3'd3;
      4'b1101, 4'b0010: dec4 = 3'd4;
      4'b1010:          dec4 = 3'd5;
      4'b0110:          dec4 = 3'd6;
      4'b1110, 4'b0001, 4'b0111, 4'b1000: dec4 = 3'd7;
      default: begin dec4 = 3'd0; ok = 1'b0; end
    endcase
  endfunction

  logic       rd;        // running disparity, 1 = positive
  logic       rd_known;  // rd has been set by an unbalanced sub-block
  logic [5:0] c6;
  logic [3:0] c4, c4_eff;
  logic [4:0] x;
  logic [2:0] y;
  logic       ok6, ok4, is_k, disp_err, rd6, rd_next;
  logic [2:0] ones6;
  logic [2:0] ones4;

  always_comb begin
    c6 = {in_sym[0], in_sym[1], in_sym[2], in_sym[3], in_sym[4], in_sym[5]};
    c4 = {in_sym[6], in_sym[7], in_sym[8], in_sym[9]};
    // In K28 sent at positive disparity (110000) the fghj sub-block is the
    // complement of the data mapping
    c4_eff = (c6 == 6'b110000) ? ~c4 : c4;
    x = dec6(c6, ok6);
    y = dec4(c4_eff, ok4);
    is_k = (c6 == 6'b001111) || (c6 == 6'b110000) ||
           (((c6 == 6'b111010) || (c6 == 6'b000101) || (c6 == 6'b110110) || (c6 == 6'b001001) ||
             (c6 == 6'b101110) || (c6 == 6'b010001) || (c6 == 6'b011110) || (c6 == 6'b100001)) &&
            ((c4 == 4'b0111) || (c4 == 4'b1000)));
    ones6 = 3'($countones(c6));
    ones4 = 3'($countones(c4));
    disp_err = 1'b0;
    // 6b sub-block against the running disparity
    if (ones6 == 3'd4) begin
      disp_err = disp_err | rd;
      rd6 = 1'b1;
    end else if (ones6 == 3'd2) begin
      disp_err = disp_err | ~rd;
      rd6 = 1'b0;
    end else begin
      rd6 = rd;
      if (c6 == 6'b111000) disp_err = disp_err | rd;
      if (c6 == 6'b000111) disp_err = disp_err | ~rd;
    end
    // 4b sub-block against the disparity left by the 6b one
    if (ones4 == 3'd3) begin
      disp_err = disp_err | rd6;
      rd_next = 1'b1;
    end else if (ones4 == 3'd1) begin
      disp_err = disp_err | ~rd6;
      rd_next = 1'b0;
    end else begin
      rd_next = rd6;
      if (c4 == 4'b1100) disp_err = disp_err | rd6;
      if (c4 == 4'b0011) disp_err = disp_err | ~rd6;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd        <= 1'b0;
      rd_known  <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_k     <= 1'b0;
      out_err   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data <= {y, x};
        out_k    <= is_k;
        out_err  <= ~ok6 | ~ok4 | (disp_err & rd_known);
        // a bad symbol does not move the running disparity
        if (ok6 && ok4) begin
          rd <= rd_next;
          if (ones6 != 3'd3 || ones4 != 3'd2) rd_known <= 1'b1;
        end
      end
    end
  end

endmodule

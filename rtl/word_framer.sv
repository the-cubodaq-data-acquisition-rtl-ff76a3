// word_framer: assembles the decoded bytes of one TOFPET2 link into 64-bit
// words.
//
// Framing rule: every control (K) character, normally the K28.5 idle, marks a
// word boundary; eight consecutive data bytes then make one word, the first
// byte landing in bits 63:56. Words may follow each other without idle
// characters, so one link carries at most one word per 80 bit times
// (2e6 words/s at 160 Mbit/s). A K character or a code error in the middle
// of a word throws away the partial word.
//
// Interface: byte stream in (in_valid strobe with data, K and error flags);
// word/word_valid out, word_valid a one-cycle strobe.
// Timing: word_valid rises the cycle after the eighth byte is accepted.
// The paper gives the function (8-bit bytes in, 64-bit words out); the
// framing rule is this design's choice, as the paper does not give the link
// protocol of the ASIC.
module word_framer (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic [7:0]  in_data,
  input  logic        in_k,
  input  logic        in_err,
  output logic        word_valid,
  output logic [63:0] word
);

  logic [2:0]  nbytes;   // bytes already held in shreg
  logic [55:0] shreg;

  always_ff @(posedge clk) begin
    if (rst) begin
      nbytes     <= '0;
      shreg      <= '0;
      word       <= '0;
      word_valid <= 1'b0;
    end else begin
      word_valid <= 1'b0;
      if (in_valid) begin
        if (in_k || in_err) begin
          nbytes <= '0;
        end else if (nbytes == 3'd7) begin
          word       <= {shreg, in_data};
          word_valid <= 1'b1;
          nbytes     <= '0;
        end else begin
          shreg  <= {shreg[47:0], in_data};
          nbytes <= nbytes + 3'd1;
        end
      end
    end
  end

endmodule

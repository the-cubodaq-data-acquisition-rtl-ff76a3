// xb_adapter: splits each 128-bit packet into four 32-bit words.
//
// A packet accepted from the linker is held in a register and sent out as
// four words, bits 31:0 first and bits 127:96 last, so a little-endian host
// that reads the 16 bytes in order sees the packet as one 128-bit number.
// The next packet is accepted in the cycle the fourth word leaves, so a
// continuous stream runs at one word per cycle with no gaps.
//
// Interface: valid/ready on both sides; out_word is stable while out_valid
// is high and out_ready low.
// Timing: first word one cycle after the packet is accepted; four cycles per
// packet at full rate.
// The 128-to-4x32 split is the paper's; the word order is this design's.
module xb_adapter (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic [127:0] in_pkt,
  output logic         in_ready,
  output logic         out_valid,
  output logic [31:0]  out_word,
  input  logic         out_ready
);

  logic [127:0] hold;
  logic [1:0]   idx;
  logic         last_out;

  assign out_word = hold[32*idx +: 32];
  assign last_out = out_valid && out_ready && (idx == 2'd3);
  assign in_ready = !out_valid || last_out;

  always_ff @(posedge clk) begin
    if (rst) begin
      hold      <= '0;
      idx       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        hold      <= in_pkt;
        idx       <= '0;
        out_valid <= 1'b1;
      end else if (last_out) begin
        out_valid <= 1'b0;
        idx       <= '0;
      end else if (out_valid && out_ready) begin
        idx <= idx + 2'd1;
      end
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (rst)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_word)));

endmodule

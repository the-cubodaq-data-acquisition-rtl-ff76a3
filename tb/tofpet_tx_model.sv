// tofpet_tx_model: behavioural model of the data output of one TOFPET2 ASIC.
//
// Not synthesizable. It sends 64-bit words as eight 8b10b data bytes, most
// significant byte first, and K28.5 idle characters whenever it has nothing
// to send, one bit per clk cycle, bit 'a' first. Words are queued by pulsing
// push with the word; when stamp is high the low 16 bits of a queued word are
// replaced by the model's own clock count since rst, as the ASIC stamps a hit
// with its coarse time. flip_bit inverts the next bit sent (to inject a code
// error). The framing is the one the receiver of this design expects; the
// real ASIC's frame format is not modelled.
module tofpet_tx_model
  import enc8b10b_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        push,
  input  logic [63:0] word,
  input  logic        stamp,
  input  logic        flip_bit,
  output logic        sdata,
  output int          queued
);

  logic [63:0] q[$];
  logic [7:0]  bytes[$];
  logic [9:0]  sym;
  int          bitpos;
  logic        rd;
  logic [63:0] ts;

  initial begin
    rd     = 1'b0;
    bitpos = 0;
    ts     = 0;
    sym    = encode(8'hBC, 1'b1, rd);
    sdata  = 1'b0;
    queued = 0;
  end

  always @(posedge clk) begin
    logic r;
    if (rst) ts <= 0;
    else     ts <= ts + 1;
    if (push) q.push_back(stamp ? {word[63:16], ts[15:0]} : word);
    sdata <= sym[bitpos] ^ flip_bit;
    if (bitpos == 9) begin
      bitpos = 0;
      if (bytes.size() == 0 && q.size() != 0) begin
        logic [63:0] w;
        w = q.pop_front();
        for (int i = 7; i >= 0; i--) bytes.push_back(w[8*i +: 8]);
      end
      r = rd;
      if (bytes.size() != 0) sym = encode(bytes.pop_front(), 1'b0, r);
      else                   sym = encode(8'hBC, 1'b1, r);
      rd = r;
    end else begin
      bitpos = bitpos + 1;
    end
    queued <= q.size() + (bytes.size() + 7) / 8 + (push ? 1 : 0);
  end

endmodule

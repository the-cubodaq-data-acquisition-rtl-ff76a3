// rx_lane: receiver chain for one TOFPET2 data line.
//
// des -> dec_8b10b -> word_framer run on the 160 MHz receiver clock; the
// 64-bit words they produce cross to the 40 MHz system clock through an
// async_fifo. A disabled lane (enable low) discards its words. A word that
// finds the FIFO full is dropped and sets the sticky overflow flag; any 8b10b
// code or disparity error after lock sets the sticky code_err flag. Both
// flags, and locked, are brought to clk_40 by two-flop synchronizers and
// clear only with the lane reset (fe_reset).
//
// Interface: sdata (serial, asynchronous), enable (any clock, synchronized
// here); read side rd_en/rdata/empty in clk_40 with first-word fall-through.
// Timing: the last bit of a word reaches the FIFO about 5 clk_160 cycles
// after it is sampled and is readable 2-3 clk_40 cycles later.
// The chain and the 64x64 FIFO are the paper's; the drop-on-full policy and
// the flags are this design's.
module rx_lane #(
  parameter int FIFO_DEPTH = 64
) (
  input  logic        clk_160,
  input  logic        rst_160,
  input  logic        sdata,
  input  logic        enable,
  input  logic        clk_40,
  input  logic        rst_40,
  input  logic        rd_en,
  output logic [63:0] rdata,
  output logic        empty,
  output logic        locked,
  output logic        code_err,
  output logic        overflow
);

  logic [9:0]  sym;
  logic        sym_valid, des_locked;
  logic        b_valid, b_k, b_err;
  logic [7:0]  b_data;
  logic        w_valid;
  logic [63:0] w_data;
  logic        full;
  logic [1:0]  en_sync;
  logic        ovf_160, err_160;
  logic [2:0]  s1, s2;   // synchronizers for locked, code_err, overflow

  des u_des (
    .clk(clk_160), .rst(rst_160), .sdata(sdata),
    .sym(sym), .sym_valid(sym_valid), .locked(des_locked)
  );

  dec_8b10b u_dec (
    .clk(clk_160), .rst(rst_160), .in_valid(sym_valid), .in_sym(sym),
    .out_valid(b_valid), .out_data(b_data), .out_k(b_k), .out_err(b_err)
  );

  word_framer u_wf (
    .clk(clk_160), .rst(rst_160), .in_valid(b_valid), .in_data(b_data),
    .in_k(b_k), .in_err(b_err), .word_valid(w_valid), .word(w_data)
  );

  async_fifo #(.WIDTH(64), .DEPTH(FIFO_DEPTH)) u_fifo (
    .wclk(clk_160), .wrst(rst_160), .wr_en(w_valid && en_sync[1]), .wdata(w_data), .full(full),
    .rclk(clk_40), .rrst(rst_40), .rd_en(rd_en), .rdata(rdata), .empty(empty)
  );

  always_ff @(posedge clk_160) begin
    if (rst_160) begin
      en_sync <= '0;
      ovf_160 <= 1'b0;
      err_160 <= 1'b0;
    end else begin
      en_sync <= {en_sync[0], enable};
      if (w_valid && en_sync[1] && full) ovf_160 <= 1'b1;
      if (b_valid && b_err)              err_160 <= 1'b1;
    end
  end

  always_ff @(posedge clk_40) begin
    if (rst_40) begin
      s1 <= '0;
      s2 <= '0;
    end else begin
      s1 <= {ovf_160, err_160, des_locked};
      s2 <= s1;
    end
  end

  assign locked   = s2[0];
  assign code_err = s2[1];
  assign overflow = s2[2];

endmodule

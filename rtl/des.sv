// des: serial-to-parallel converter for one TOFPET2 data line.
//
// The ASIC sends 8b10b symbols at 160 Mbit/s on one LVDS pair. The line is
// sampled once per clk_160 cycle (the sampling phase is set by the PLL that
// makes clk_160, as the paper describes for cable-length compensation),
// passed through a two-flop synchronizer and shifted into a 10-bit window
// whose bit 0 is the first bit received (8b10b bit 'a').
//
// Symbol alignment: whenever the window holds a K28.5 comma of either
// disparity, the window is emitted as a symbol and the 10-cycle symbol
// counter restarts, so the receiver locks on the first comma and re-locks
// if a later comma shows a different offset. After lock a symbol is emitted
// every 10 cycles.
//
// Interface: sdata in; sym/sym_valid out (one-cycle strobe), locked stays
// high from the first comma until reset.
// Timing: a bit reaches the window 3 cycles after it is sampled; the symbol
// is registered one cycle after the window is complete.
// The paper gives the function (DES, 1 bit in, 10 bits out); the comma
// search, bit order and synchronizer are this design's choices.
module des (
  input  logic       clk,
  input  logic       rst,
  input  logic       sdata,
  output logic [9:0] sym,
  output logic       sym_valid,
  output logic       locked
);

  localparam logic [9:0] COMMA_NEG = 10'h17C;  // K28.5, RD-: abcdei=001111 fghj=1010
  localparam logic [9:0] COMMA_POS = 10'h283;  // K28.5, RD+

  logic [1:0] sync_q;
  logic [9:0] win;
  logic [3:0] cnt;
  logic       is_comma;

  assign is_comma = (win == COMMA_NEG) || (win == COMMA_POS);

  always_ff @(posedge clk) begin
    if (rst) begin
      sync_q    <= '0;
      win       <= '0;
      cnt       <= '0;
      sym       <= '0;
      sym_valid <= 1'b0;
      locked    <= 1'b0;
    end else begin
      sync_q    <= {sync_q[0], sdata};
      win       <= {sync_q[1], win[9:1]};
      sym_valid <= 1'b0;
      if (is_comma) begin
        sym       <= win;
        sym_valid <= 1'b1;
        locked    <= 1'b1;
        cnt       <= 4'd0;
      end else if (cnt == 4'd9) begin
        cnt <= '0;
        if (locked) begin
          sym       <= win;
          sym_valid <= 1'b1;
        end
      end else begin
        cnt <= cnt + 4'd1;
      end
    end
  end

endmodule

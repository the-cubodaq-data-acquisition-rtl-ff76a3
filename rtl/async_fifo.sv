// async_fifo: dual-clock FIFO with Gray-coded pointers.
//
// Carries the 64-bit words of one receiver lane from the 160 MHz receiver
// clock to the 40 MHz system clock (64 words deep by default). Each side
// keeps a binary pointer one bit wider than the address and publishes its
// Gray-coded copy to the other side through a two-flop synchronizer; full
// and empty are computed from the local pointer and the synchronized remote
// one, so both flags are conservative.
//
// Interface: write side (wclk, wrst, wr_en, wdata, full) and read side
// (rclk, rrst, rd_en, rdata, empty). Read is first-word fall-through: rdata
// shows the oldest word whenever empty is low, rd_en pops it. Writes while
// full and reads while empty are ignored.
// Timing: a written word becomes visible to the reader 2-3 read-clock cycles
// later. Both resets must be asserted together.
// The width and depth are the paper's; the pointer scheme is the usual one.
module async_fifo #(
  parameter int WIDTH = 64,
  parameter int DEPTH = 64      // power of two
) (
  input  logic             wclk,
  input  logic             wrst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);

  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer seen by the reader
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer seen by the writer
  logic [AW:0] wbin_next, rbin_next;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  assign full      = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign wbin_next = wbin + (AW+1)'(wr_en && !full);

  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_next;
      wgray    <= bin2gray(wbin_next);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  // read side
  assign empty     = (rgray == wgray_r2);
  assign rbin_next = rbin + (AW+1)'(rd_en && !empty);
  assign rdata     = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_next;
      rgray    <= bin2gray(rbin_next);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

endmodule

// sync_fifo: single-clock FIFO, the data FIFO read by the host DMA core.
//
// Holds DEPTH words of WIDTH bits (16384 x 32 by default, 64 KiB) between
// the packet splitter and the host transport core, which reads it like a
// standard FIFO. Storage is a plain array so synthesis maps it to block RAM.
//
// Interface: wr_en/wdata/full on the write side; rd_en/rdata/empty on the
// read side, first-word fall-through (rdata is the oldest word while empty
// is low); count is the fill level. Writes while full and reads while empty
// are ignored. Simultaneous read and write are allowed at any level.
// Timing: a word written in cycle n can be read from cycle n+1.
// Width and depth are the paper's; everything else is this design's choice.
module sync_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 16384   // power of two
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   wr_en,
  input  logic [WIDTH-1:0]       wdata,
  output logic                   full,
  input  logic                   rd_en,
  output logic [WIDTH-1:0]       rdata,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] count
);

  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wptr, rptr;
  logic        do_wr, do_rd;

  assign count = wptr - rptr;
  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign rdata = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      wptr <= wptr + (AW+1)'(do_wr);
      rptr <= rptr + (AW+1)'(do_rd);
    end
  end

endmodule

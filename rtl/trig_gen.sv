// trig_gen: trigger source selection and internal trigger sequencer.
//
// Three sources, each enabled by a bit of src_en:
//   bit 0  L1A from the TTC receiver, already synchronous to clk_40;
//   bit 1  an external trigger input, asynchronous: two-flop synchronizer
//          and rising-edge detector, one trigger per rising edge;
//   bit 2  an internal sequencer that fires every seq_period clk_40 cycles
//          (seq_period = 0 stops it).
// When two sources fire in the same cycle one trigger is issued, with the
// priority L1A, external, sequencer; the others are not kept.
//
// Interface: trig_valid is a one-cycle pulse with trig_src (cubodaq_pkg
// trig_src_e) naming its source.
// Timing: L1A one cycle after it arrives; external edge 3 cycles after the
// first sampling clock that sees it; the sequencer's first pulse comes
// seq_period cycles after it is enabled.
// The three sources are the paper's; the priority and the sequencer's form
// are this design's.
module trig_gen
  import cubodaq_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        l1a,
  input  logic        ext,
  input  logic [2:0]  src_en,
  input  logic [31:0] seq_period,
  output logic        trig_valid,
  output logic [1:0]  trig_src
);

  logic [2:0]  ext_q;     // two sync stages and the previous value
  logic        ext_edge;
  logic [31:0] seq_cnt;
  logic        seq_fire;

  assign ext_edge = ext_q[1] && !ext_q[2];
  assign seq_fire = src_en[2] && (seq_period != 0) && (seq_cnt >= seq_period - 32'd1);

  always_ff @(posedge clk) begin
    if (rst) begin
      ext_q      <= '0;
      seq_cnt    <= '0;
      trig_valid <= 1'b0;
      trig_src   <= TRIG_SRC_L1A;
    end else begin
      ext_q <= {ext_q[1:0], ext};
      if (!src_en[2] || seq_fire) seq_cnt <= '0;
      else                        seq_cnt <= seq_cnt + 32'd1;
      trig_valid <= 1'b1;
      if (src_en[0] && l1a)            trig_src <= TRIG_SRC_L1A;
      else if (src_en[1] && ext_edge)  trig_src <= TRIG_SRC_EXT;
      else if (seq_fire)               trig_src <= TRIG_SRC_SEQ;
      else                             trig_valid <= 1'b0;
    end
  end

endmodule

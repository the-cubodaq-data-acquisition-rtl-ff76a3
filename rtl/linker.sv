// linker: merges hits, triggers and B-Channel words into 128-bit packets.
//
// Sources: the eight lane FIFOs (64-bit hit words), triggers from trig_gen
// and, when bch_en is set, the 32-bit long-format B-Channel words from the
// TTC receiver. Triggers and B-Channel words are stamped on arrival with the
// board timebase and wait in small queues (AUX_DEPTH entries; an arrival on a
// full queue is lost and sets the sticky aux_lost flag). A round-robin arbiter over the ten sources moves one
// source per clk_40 cycle into the output register.
//
// Timebase: a 64-bit count of 160 MHz cycles since fe_reset, advanced by 4
// every clk_40 cycle. The low HIT_TS_W bits of a hit word are taken as the
// ASIC's own coarse time; the linker extends them to 64 bits by borrowing the
// upper timebase bits, stepping back one period of 2^HIT_TS_W when the low
// bits are ahead of the timebase (the hit was stamped before a wrap). This
// holds while a hit spends less than 2^HIT_TS_W cycles in the chain.
//
// Packet (see cubodaq_pkg::packet_t): type, source, reserved, 48-bit payload
// and the 64-bit timestamp. Hit payload: the hit word without its time bits;
// trigger payload: running trigger number from 0; B-Channel payload: the
// 32-bit word. The reserved byte and the top two bits of the type field are
// always zero at the three packet types defined so far; they are kept so the
// layout has room for more types and flags without changing the host side.
//
// Interface: pkt/pkt_valid/pkt_ready is a valid/ready stream; a packet stays
// stable while it waits. lane_rd pops the granted lane FIFO.
// Timing: one packet per cycle at most; a source's word appears on pkt one
// cycle after it is granted.
// The paper gives the sources, the 128-bit packet and the 64-bit timestamp;
// the packet layout, the arbiter and the queues are this design's choices.
module linker
  import cubodaq_pkg::*;
#(
  parameter int N_LANES   = 8,
  parameter int HIT_TS_W  = 16,
  parameter int AUX_DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [N_LANES-1:0][63:0] lane_data,
  input  logic [N_LANES-1:0]     lane_empty,
  output logic [N_LANES-1:0]     lane_rd,
  input  logic                   trig_valid,
  input  logic [1:0]             trig_src,
  input  logic                   bch_valid,
  input  logic [31:0]            bch_data,
  input  logic                   bch_en,
  output logic                   pkt_valid,
  output packet_t                pkt,
  input  logic                   pkt_ready,
  output logic [63:0]            timebase,
  output logic [31:0]            hit_cnt,
  output logic [31:0]            trig_cnt,
  output logic                   aux_lost     // sticky: a trigger or B-Channel word found its queue full
);

  localparam int NSRC = N_LANES + 2;
  localparam int TRIG = N_LANES;       // requester index of the trigger queue
  localparam int BCH  = N_LANES + 1;   // requester index of the B-Channel queue
  localparam int SW   = $clog2(NSRC);

  // ---------------- timebase
  always_ff @(posedge clk) begin
    if (rst) timebase <= '0;
    else     timebase <= timebase + 64'd4;
  end

  // ---------------- trigger and B-Channel queues
  logic [65:0] tq_rdata;
  logic [95:0] bq_rdata;
  logic        tq_empty, bq_empty, tq_full, bq_full, tq_rd, bq_rd;
  logic [$clog2(AUX_DEPTH):0] tq_count, bq_count;

  sync_fifo #(.WIDTH(66), .DEPTH(AUX_DEPTH)) u_trig_q (
    .clk(clk), .rst(rst), .wr_en(trig_valid), .wdata({trig_src, timebase}), .full(tq_full),
    .rd_en(tq_rd), .rdata(tq_rdata), .empty(tq_empty), .count(tq_count)
  );

  sync_fifo #(.WIDTH(96), .DEPTH(AUX_DEPTH)) u_bch_q (
    .clk(clk), .rst(rst), .wr_en(bch_valid && bch_en), .wdata({bch_data, timebase}), .full(bq_full),
    .rd_en(bq_rd), .rdata(bq_rdata), .empty(bq_empty), .count(bq_count)
  );

  always_ff @(posedge clk) begin
    if (rst) aux_lost <= 1'b0;
    else if ((trig_valid && tq_full) || (bch_valid && bch_en && bq_full)) aux_lost <= 1'b1;
  end

  // ---------------- round-robin arbiter
  logic [NSRC-1:0] req;
  logic [SW-1:0]   last, grant_idx;
  logic            grant_any, load;

  assign req  = {~bq_empty, ~tq_empty, ~lane_empty};
  assign load = !pkt_valid || pkt_ready;

  always_comb begin
    int idx;
    grant_any = 1'b0;
    grant_idx = '0;
    for (int k = 1; k <= NSRC; k++) begin
      idx = (int'(last) + k) % NSRC;
      if (!grant_any && req[idx]) begin
        grant_any = 1'b1;
        grant_idx = SW'(idx);
      end
    end
  end

  always_comb begin
    lane_rd = '0;
    tq_rd   = 1'b0;
    bq_rd   = 1'b0;
    if (load && grant_any) begin
      if (int'(grant_idx) == TRIG)     tq_rd = 1'b1;
      else if (int'(grant_idx) == BCH) bq_rd = 1'b1;
      else
        for (int l = 0; l < N_LANES; l++) if (int'(grant_idx) == l) lane_rd[l] = 1'b1;
    end
  end

  // ---------------- timestamp extension of a hit word
  function automatic logic [63:0] extend_ts(input logic [HIT_TS_W-1:0] low, input logic [63:0] now);
    logic [63:0] t;
    t = {now[63:HIT_TS_W], low};
    if (low > now[HIT_TS_W-1:0]) t = t - (64'd1 << HIT_TS_W);
    return t;
  endfunction

  // ---------------- output register
  logic [47:0] trig_num;
  packet_t     next_pkt;

  always_comb begin
    next_pkt = '0;
    if (int'(grant_idx) == TRIG) begin
      next_pkt.ptype     = PKT_TRIG;
      next_pkt.source    = {2'b00, tq_rdata[65:64]};
      next_pkt.payload   = trig_num;
      next_pkt.timestamp = tq_rdata[63:0];
    end else if (int'(grant_idx) == BCH) begin
      next_pkt.ptype     = PKT_BCH;
      next_pkt.payload   = {16'h0, bq_rdata[95:64]};
      next_pkt.timestamp = bq_rdata[63:0];
    end else begin
      next_pkt.ptype     = PKT_HIT;
      next_pkt.source    = 4'(grant_idx);
      next_pkt.payload   = 48'(lane_data[grant_idx] >> HIT_TS_W);
      next_pkt.timestamp = extend_ts(lane_data[grant_idx][HIT_TS_W-1:0], timebase);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pkt_valid <= 1'b0;
      pkt       <= '0;
      last      <= SW'(NSRC - 1);
      trig_num  <= '0;
      hit_cnt   <= '0;
      trig_cnt  <= '0;
    end else if (load) begin
      pkt_valid <= grant_any;
      if (grant_any) begin
        pkt  <= next_pkt;
        last <= grant_idx;
        if (int'(grant_idx) == TRIG) begin
          trig_num <= trig_num + 48'd1;
          trig_cnt <= trig_cnt + 32'd1;
        end else if (int'(grant_idx) < N_LANES) begin
          hit_cnt <= hit_cnt + 32'd1;
        end
      end
    end
  end

  // a packet waiting for the sink must not change
  property p_hold;
    @(posedge clk) disable iff (rst) (pkt_valid && !pkt_ready) |=> (pkt_valid && $stable(pkt));
  endproperty
  a_hold: assert property (p_hold);

endmodule

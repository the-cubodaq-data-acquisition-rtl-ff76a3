// tb_linker: the linker with behavioural lane FIFOs.
// Checks, against packets built independently in the testbench:
//  - hit packets: type, lane, payload (word without its 16 time bits) and
//    the 64-bit timestamp recovered from the 16-bit hit time, including hits
//    stamped before a wrap of the 16-bit counter;
//  - trigger packets numbered from 0 and stamped on arrival;
//  - B-Channel words only when enabled;
//  - round-robin: with every source busy each gets one packet in ten;
//  - one packet per cycle when the sink is always ready;
//  - packets held stable under random back-pressure;
//  - a trigger arriving at a full queue is dropped and flagged (aux_lost).
module tb_linker;
  import cubodaq_pkg::*;

  localparam int NL = 8;
  logic clk = 0, rst = 1;
  logic [NL-1:0][63:0] lane_data;
  logic [NL-1:0] lane_empty, lane_rd;
  logic trig_valid = 0, bch_valid = 0, bch_en = 0;
  logic [1:0] trig_src = 0;
  logic [31:0] bch_data = 0;
  logic pkt_valid, pkt_ready;
  packet_t pkt;
  logic [63:0] timebase;
  logic [31:0] hit_cnt, trig_cnt;
  logic        aux_lost;
  int checks = 0, failures = 0;

  linker dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- behavioural lane FIFOs and the expected packets per source
  logic [63:0] lq [NL][$];
  packet_t     expq [NL+2][$];
  logic [NL-1:0] rd_q;
  logic [63:0] now;          // the testbench's own timebase
  logic [47:0] trig_no = 0;

  always @(posedge clk) begin
    if (rst) now <= 0; else now <= now + 4;
    rd_q <= lane_rd;
  end

  always @(negedge clk) begin
    for (int i = 0; i < NL; i++) begin
      if (rd_q[i] && lq[i].size() != 0) void'(lq[i].pop_front());
      lane_empty[i] = (lq[i].size() == 0);
      lane_data[i]  = (lq[i].size() != 0) ? lq[i][0] : 64'h0;
    end
    rd_q = '0;
  end

  // push a hit whose true time is 'age' cycles of 160 MHz before now
  task automatic push_hit(input int lane, input int age);
    logic [63:0] t;
    logic [47:0] p;
    packet_t e;
    t = now - 64'(age);
    p = 48'({$urandom, $urandom});
    lq[lane].push_back({p, t[15:0]});
    e = '0; e.ptype = PKT_HIT; e.source = 4'(lane); e.payload = p; e.timestamp = t;
    expq[lane].push_back(e);
  endtask

  task automatic pulse_trig(input logic [1:0] src);
    packet_t e;
    @(negedge clk); trig_valid = 1; trig_src = src;
    @(posedge clk);
    e = '0; e.ptype = PKT_TRIG; e.source = {2'b0, src}; e.payload = trig_no; e.timestamp = now;
    trig_no++;
    expq[NL].push_back(e);
    @(negedge clk); trig_valid = 0;
  endtask

  task automatic pulse_bch(input logic [31:0] d);
    packet_t e;
    @(negedge clk); bch_valid = 1; bch_data = d;
    @(posedge clk);
    e = '0; e.ptype = PKT_BCH; e.payload = {16'h0, d}; e.timestamp = now;
    if (bch_en) expq[NL+1].push_back(e);
    @(negedge clk); bch_valid = 0;
  endtask

  // ---- sink
  bit random_ready = 0, stall_all = 0;
  int npkt = 0, hold_bad = 0;
  int grants[$];
  packet_t prev;
  logic prev_stall = 0;
  always @(negedge clk) pkt_ready <= stall_all ? 1'b0 : random_ready ? ($urandom % 3 != 0) : 1'b1;

  always @(posedge clk) if (!rst) begin
    if (prev_stall && (!pkt_valid || pkt != prev)) hold_bad++;
    prev_stall <= pkt_valid && !pkt_ready;
    prev <= pkt;
    if (pkt_valid && pkt_ready) begin
      int s;
      npkt++;
      s = (pkt.ptype == PKT_HIT) ? int'(pkt.source) : (pkt.ptype == PKT_TRIG) ? NL : NL + 1;
      grants.push_back(s);
      if (expq[s].size() == 0) begin
        failures++; checks++; $display("FAIL unexpected packet %h", pkt);
      end else begin
        packet_t e;
        e = expq[s].pop_front();
        checks++;
        if (pkt != e) begin failures++; $display("FAIL source %0d: got %h want %h", s, pkt, e); end
      end
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pending();
    int n = 0;
    for (int i = 0; i < NL + 2; i++) n += expq[i].size();
    return n;
  endfunction

  initial begin
    int c0, n0;
    lane_empty = '1; lane_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    repeat (2000) @(posedge clk);
    // 1. hits from every lane, mixed with triggers; B-Channel disabled
    for (int k = 0; k < 5; k++)
      for (int i = 0; i < NL; i++) push_hit(i, $urandom % 3000);
    pulse_trig(TRIG_SRC_L1A);
    pulse_bch(32'h1111_2222);          // dropped: not enabled
    pulse_trig(TRIG_SRC_SEQ);
    repeat (100) @(posedge clk);
    check(pending() == 0, "all hits and triggers delivered");
    // 2. B-Channel enabled
    bch_en = 1;
    pulse_bch(32'hCAFE_F00D);
    repeat (10) @(posedge clk);
    check(pending() == 0, "B-Channel word delivered");
    bch_en = 0;
    // 3. round robin and one packet per cycle: every source busy
    grants.delete();
    @(negedge clk);
    n0 = npkt; c0 = int'(now / 4);
    for (int i = 0; i < NL; i++) for (int k = 0; k < 4; k++) push_hit(i, 10);
    @(negedge clk); trig_valid = 1; trig_src = TRIG_SRC_EXT;
    for (int k = 0; k < 4; k++) begin
      packet_t e;
      @(posedge clk);
      e = '0; e.ptype = PKT_TRIG; e.source = {2'b0, TRIG_SRC_EXT}; e.payload = trig_no; e.timestamp = now;
      trig_no++; expq[NL].push_back(e);
      @(negedge clk);
    end
    trig_valid = 0;
    wait (npkt - n0 == 36);
    check(int'(now / 4) - c0 <= 37, $sformatf("one packet per cycle: 36 packets in %0d cycles", int'(now / 4) - c0));
    begin
      int seen [NL+1];
      for (int i = 0; i <= NL; i++) seen[i] = 0;
      for (int j = 0; j < 27 && j < grants.size(); j++) seen[grants[j]]++;
      for (int i = 0; i <= NL; i++) check(seen[i] == 3, $sformatf("source %0d served %0d times in 27 grants", i, seen[i]));
    end
    // 4. run the timebase past a 16-bit wrap with hits that straddle it
    wait (now[15:0] > 16'hFF00);
    for (int i = 0; i < NL; i++) push_hit(i, 200);
    repeat (100) @(posedge clk);
    for (int i = 0; i < NL; i++) push_hit(i, 600);   // stamped before the wrap, read after
    repeat (100) @(posedge clk);
    check(pending() == 0, "hits across the 16-bit wrap delivered");
    // 5. random back-pressure
    random_ready = 1;
    for (int k = 0; k < 200; k++) begin
      push_hit($urandom % NL, $urandom % 5000);
      if (k % 20 == 0) pulse_trig(TRIG_SRC_L1A);
      @(negedge clk);
    end
    repeat (2000) @(posedge clk);
    check(pending() == 0, "all delivered under back-pressure");
    check(hold_bad == 0, $sformatf("packet held stable while stalled (%0d violations)", hold_bad));
    check(hit_cnt == 32'(5*NL + 4*NL + 2*NL + 200), $sformatf("hit counter %0d", hit_cnt));
    check(trig_cnt == 32'(trig_no), $sformatf("trigger counter %0d", trig_cnt));
    // 6. trigger queue overflow: with the output stalled, one trigger sits in
    // the output register and AUX_DEPTH in the queue; the rest are lost
    check(!aux_lost, "no loss flagged before the queue overflows");
    random_ready = 0;
    stall_all = 1;
    repeat (3) @(posedge clk);
    for (int k = 0; k < 20; k++) pulse_trig(TRIG_SRC_EXT);
    check(aux_lost, "loss flagged when the trigger queue overflows");
    while (expq[NL].size() > 17) begin void'(expq[NL].pop_back()); trig_no--; end
    stall_all = 0;
    repeat (100) @(posedge clk);
    check(pending() == 0, "the 17 triggers that fitted are delivered in order");
    check(trig_cnt == 32'(trig_no), $sformatf("trigger counter after loss %0d", trig_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_workload_rates: the board firmware at its default size under the two
// hit rates quoted for the system: one ASIC sending as fast as its serial
// link allows (about 2 MHz of hits), and a whole board at a sustained
// 1.3 MHz of hits spread over all eight ASICs.
//
// The ASICs are transmitter models (tofpet_tx_model) that stamp each hit
// with their clock count; the host reads the data FIFO at one word per
// clk_40 cycle and rebuilds the 128-bit packets. Checked:
//  A. link-limited ASIC: 400 hits queued at once on lane 0 arrive at
//     160e6 / 80 = 2.0e6 hits/s (within 1%), all in order with exact
//     timestamps;
//  B. board load: eight lanes with random gaps averaging 8 / 1.3e6 s per
//     lane for 400 us; every hit arrives with its exact timestamp, the
//     measured rate is 1.3 MHz within 15%, no lane FIFO overflows and the
//     data FIFO never holds more than a few packets;
//  and in B the largest hit latency (from the ASIC's stamp to the packet
//  leaving the data FIFO) stays below 4 us: a hit waits up to one 500 ns
//  word time per earlier hit still queued in its ASIC, then ~0.6 us in the
//  receiver, linker and splitter. In A the hits wait in the ASIC
//  itself, so their latency measures the link, not the firmware.
module tb_workload_rates;
  import cubodaq_pkg::*;

  localparam int NL = 8;

  logic clk_40 = 0, clk_160 = 0, clk_160_tp = 0;
  logic cpu_rst = 1;
  logic [NL-1:0] tofpet_sdata, cfg_cs_n;
  logic [NL-1:0] cfg_sdi = '0;
  logic tofpet_rst, cfg_sclk, cfg_sdo;
  logic ttc_l1a = 0, ttc_brcst_str = 0, ttc_bch_str = 0, ext_trig = 0;
  logic [7:0] ttc_brcst = 0;
  logic [31:0] ttc_bch_data = 0;
  logic ttcrx_reset_n, qpll_reset_n;
  logic xb_data_rden, xb_data_empty;
  logic [31:0] xb_data_dout;
  logic reg_wr = 0, reg_rd = 0;
  logic [15:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic spi_sclk, spi_mosi, spi_miso = 0;
  logic [12:0] spi_cs_n;
  logic i2c_scl_o, i2c_sda_o, i2c_sda_i;
  logic [7:0] dbg_out;

  int checks = 0, failures = 0;

  cubodaq_fw dut (.*);

  assign i2c_sda_i = i2c_sda_o;

  always #3.125 clk_160 = ~clk_160;
  always #12.5  clk_40  = ~clk_40;
  initial begin #1.4; forever #3.125 clk_160_tp = ~clk_160_tp; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- ASIC models
  logic [NL-1:0] push = '0;
  logic [63:0]   push_word [NL];
  int            queued [NL];
  logic [63:0]   tp_cnt;
  always @(posedge clk_160_tp) if (tofpet_rst) tp_cnt <= 0; else tp_cnt <= tp_cnt + 1;

  for (genvar i = 0; i < NL; i++) begin : g_asic
    tofpet_tx_model u_tx (.clk(clk_160_tp), .rst(tofpet_rst), .push(push[i]), .word(push_word[i]),
                          .stamp(1'b1), .flip_bit(1'b0), .sdata(tofpet_sdata[i]), .queued(queued[i]));
  end

  // a model stamps a word with its clock count at the push, as the ASIC
  // stamps a hit when it happens; the word may then wait in the model's queue
  logic [47:0] exp_pay [NL][$];
  logic [63:0] exp_ts  [NL][$];

  task automatic send_hit(input int lane);
    logic [47:0] p;
    p = 48'({$urandom, $urandom});
    @(negedge clk_160_tp);
    push[lane] = 1; push_word[lane] = {p, 16'h0};
    @(posedge clk_160_tp);
    exp_pay[lane].push_back(p); exp_ts[lane].push_back(tp_cnt);
    @(negedge clk_160_tp); push[lane] = 0;
  endtask

  function automatic int pending_hits();
    int n = 0;
    for (int i = 0; i < NL; i++) n += exp_pay[i].size();
    return n;
  endfunction

  // ---- host reader
  logic [31:0] words[$];
  int n_hit = 0, max_level = 0;
  logic [63:0] max_latency = 0;
  realtime t_first = 0, t_last = 0;

  assign xb_data_rden = !xb_data_empty;

  always @(posedge clk_40) begin
    if (tofpet_rst) words.delete();
    else begin
      if (int'(dut.xb_count) > max_level) max_level = int'(dut.xb_count);
      if (xb_data_rden) begin
        words.push_back(xb_data_dout);
        if (words.size() == 4) begin
          packet_t p;
          int l;
          p = {words[3], words[2], words[1], words[0]};
          words.delete();
          l = int'(p.source);
          checks++;
          if (p.ptype != PKT_HIT || exp_pay[l].size() == 0) begin
            failures++; $display("FAIL unexpected packet %h", p);
          end else begin
            logic [47:0] ep;
            logic [63:0] et;
            ep = exp_pay[l].pop_front(); et = exp_ts[l].pop_front();
            if (p.payload != ep || p.timestamp != et) begin
              failures++;
              $display("FAIL lane %0d hit %h/%0d, expected %h/%0d", l, p.payload, p.timestamp, ep, et);
            end
            if (tp_cnt - p.timestamp > max_latency) max_latency = tp_cnt - p.timestamp;
            if (n_hit == 0) t_first = $realtime;
            t_last = $realtime;
            n_hit++;
          end
        end
      end
    end
  end

  task automatic rreg(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk_40); reg_rd = 1; reg_addr = a;
    @(negedge clk_40); reg_rd = 0; d = reg_rdata;
  endtask

  initial begin
    #3ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    real rate;
    for (int i = 0; i < NL; i++) push_word[i] = 0;
    repeat (10) @(posedge clk_40);
    @(negedge clk_40); cpu_rst = 0;
    repeat (40) @(posedge clk_40);
    @(negedge clk_40); ttc_brcst_str = 1; ttc_brcst = TTC_CMD_FE_RESET;
    @(negedge clk_40); ttc_brcst_str = 0;
    repeat (60) @(posedge clk_40);

    n_hit = 0; max_level = 0; max_latency = 0;
    // ---- A. one ASIC at its link limit
    // each push takes 1.5 clk_160_tp cycles, far faster than the 80-cycle
    // word time, so the model's queue never runs dry and words go back to back
    for (int k = 0; k < 400; k++) send_hit(0);
    do @(posedge clk_40); while (pending_hits() != 0 && $realtime < 1.5ms);
    check(pending_hits() == 0, $sformatf("all 400 lane-0 hits delivered (%0d left)", pending_hits()));
    rate = real'(n_hit - 1) / ((t_last - t_first) * 1.0e-9);
    $display("A: %0d hits, %.3f Mhits/s, data FIFO peak %0d words, worst latency %0d ns",
             n_hit, rate / 1.0e6, max_level, max_latency * 25 / 4);
    check(rate > 1.98e6 && rate < 2.02e6, $sformatf("link-limited lane rate %.3f MHz", rate / 1.0e6));

    // ---- B. whole board at 1.3 MHz
    n_hit = 0; max_level = 0; max_latency = 0;
    for (int i = 0; i < NL; i++) begin
      fork
        automatic int ii = i;
        begin
          realtime t_end;
          t_end = $realtime + 400us;
          while ($realtime < t_end) begin
            // exponential gaps with mean 8 / 1.3e6 s = 6154 ns = 246 clk_40
            // cycles, from a uniform draw
            real u;
            u = (real'($urandom % 1000000) + 0.5) / 1.0e6;
            repeat (int'(-246.15 * $ln(u))) @(posedge clk_40);
            if ($realtime < t_end) send_hit(ii);
          end
        end
      join_none
    end
    #401us;
    repeat (800) @(posedge clk_40);   // 20 us: longer than any queue in the models can take
    check(pending_hits() == 0, $sformatf("all board hits delivered (%0d left)", pending_hits()));
    rate = real'(n_hit - 1) / ((t_last - t_first) * 1.0e-9);
    $display("B: %0d hits, %.3f Mhits/s, data FIFO peak %0d words, worst latency %0d ns",
             n_hit, rate / 1.0e6, max_level, max_latency * 25 / 4);
    check(rate > 1.1e6 && rate < 1.5e6, $sformatf("board rate %.3f MHz", rate / 1.0e6));
    check(max_level <= 64, $sformatf("data FIFO peak %0d words", max_level));
    rreg(REG_LANE_STAT, d);
    check(d[23:8] == 16'h0, $sformatf("no overflow or code error: %h", d));
    check(max_latency < 640, $sformatf("worst latency %0d clk_160 cycles", max_latency));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cubodaq_fw: end-to-end test of the DAQ board firmware at its default
// size (eight links, 64-word lane FIFOs, 16384-word data FIFO).
//
// Eight ASIC transmitter models send time-stamped hits; a host model reads
// the data FIFO, rebuilds the 128-bit packets from four little-endian words
// and checks them; a TTC model sends L1A, broadcast commands and long-format
// B-Channel words; register reads and writes go through the register bus.
// Every mechanism of the design is made to happen and counted:
//   hits from all lanes (payload and exact 64-bit timestamp checked),
//   L1A, external and sequencer triggers (timestamp checked for L1A),
//   B-Channel words only while enabled,
//   fe_reset from the TTC command 0x04 (timebase restarts) and from a
//   register, global_reset from a register (registers return to defaults),
//   a full data FIFO stalling the splitter and overflowing the lane FIFOs
//   and the trigger queue,
//   a disabled lane, an 8b10b code error, an ASIC configuration transfer,
//   an SPI transfer, an I2C byte and the debug multiplexer.
module tb_cubodaq_fw;
  import cubodaq_pkg::*;

  localparam int NL = 8;

  logic clk_40 = 0, clk_160 = 0, clk_160_tp = 0;
  logic cpu_rst = 1;
  logic [NL-1:0] tofpet_sdata, cfg_cs_n, cfg_sdi;
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
  logic spi_sclk, spi_mosi, spi_miso;
  logic [12:0] spi_cs_n;
  logic i2c_scl_o, i2c_sda_o, i2c_sda_i;
  logic [7:0] dbg_out;

  int checks = 0, failures = 0;

  cubodaq_fw dut (.*);

  always #3.125 clk_160 = ~clk_160;
  always #12.5  clk_40  = ~clk_40;
  initial begin #1.4; forever #3.125 clk_160_tp = ~clk_160_tp; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------ ASIC models
  logic [NL-1:0] push = '0, flip = '0;
  logic [63:0]   push_word [NL];
  int            queued [NL];
  logic [63:0]   tp_cnt;        // the models' clock count since tofpet_rst

  always @(posedge clk_160_tp) if (tofpet_rst) tp_cnt <= 0; else tp_cnt <= tp_cnt + 1;

  for (genvar i = 0; i < NL; i++) begin : g_asic
    tofpet_tx_model u_tx (.clk(clk_160_tp), .rst(tofpet_rst), .push(push[i]), .word(push_word[i]),
                          .stamp(1'b1), .flip_bit(flip[i]), .sdata(tofpet_sdata[i]), .queued(queued[i]));
  end

  // expected hits per lane: {payload, time}
  logic [47:0] exp_pay [NL][$];
  logic [63:0] exp_ts  [NL][$];
  bit          check_hits = 1;

  task automatic send_hit(input int lane);
    logic [47:0] p;
    p = 48'({$urandom, $urandom});
    @(negedge clk_160_tp);
    push[lane] = 1; push_word[lane] = {p, 16'h0};
    @(posedge clk_160_tp);
    if (check_hits) begin exp_pay[lane].push_back(p); exp_ts[lane].push_back(tp_cnt); end
    @(negedge clk_160_tp); push[lane] = 0;
  endtask

  function automatic int models_busy();
    int n = 0;
    for (int i = 0; i < NL; i++) n += queued[i];
    return n;
  endfunction

  // ------------------------------------------------------------ host reader
  bit host_read = 1;
  logic [31:0] words[$];
  int n_hit = 0, n_trig[3] = '{0, 0, 0}, n_bch = 0, n_bad = 0;
  logic [63:0] l1a_ts[$];
  logic [31:0] exp_bch[$];
  logic [63:0] tbc;             // timebase rule: 4 per clk_40 since the front-end reset
                                // (tofpet_rst is fe_reset two clk_160_tp cycles later,
                                // still within the same clk_40 cycle)

  assign xb_data_rden = host_read && !xb_data_empty;

  always @(posedge clk_40) begin
    if (tofpet_rst) tbc <= 0; else tbc <= tbc + 4;
    if (tofpet_rst) words.delete();
    else if (xb_data_rden) begin
      words.push_back(xb_data_dout);
      if (words.size() == 4) begin
        packet_t p;
        p = {words[3], words[2], words[1], words[0]};
        words.delete();
        case (p.ptype)
          PKT_HIT: begin
            int l;
            n_hit++;
            l = int'(p.source);
            if (check_hits) begin
              checks++;
              if (exp_pay[l].size() == 0) begin failures++; $display("FAIL unexpected hit on lane %0d", l); end
              else begin
                logic [47:0] ep;
                logic [63:0] et;
                ep = exp_pay[l].pop_front(); et = exp_ts[l].pop_front();
                if (p.payload != ep || p.timestamp != et) begin
                  failures++;
                  $display("FAIL lane %0d hit %h/%0d, expected %h/%0d", l, p.payload, p.timestamp, ep, et);
                end
              end
            end
          end
          PKT_TRIG: begin
            n_trig[p.source[1:0]]++;
            if (p.source[1:0] == TRIG_SRC_L1A && l1a_ts.size() != 0) begin
              check(p.timestamp == l1a_ts.pop_front() + 4, $sformatf("L1A trigger time %0d", p.timestamp));
            end
          end
          PKT_BCH: begin
            n_bch++;
            check(exp_bch.size() != 0 && p.payload[31:0] == exp_bch.pop_front(), "B-Channel word");
          end
          default: n_bad++;
        endcase
      end
    end
  end

  // ------------------------------------------------------------ TTC model
  task automatic l1a();
    @(negedge clk_40); ttc_l1a = 1;
    @(posedge clk_40); l1a_ts.push_back(tbc);
    @(negedge clk_40); ttc_l1a = 0;
  endtask

  task automatic brcst(input logic [7:0] c);
    @(negedge clk_40); ttc_brcst_str = 1; ttc_brcst = c;
    @(negedge clk_40); ttc_brcst_str = 0;
  endtask

  task automatic bch_long(input logic [31:0] d, input bit expect_it);
    @(negedge clk_40); ttc_bch_str = 1; ttc_bch_data = d;
    if (expect_it) exp_bch.push_back(d);
    @(negedge clk_40); ttc_bch_str = 0;
  endtask

  // ------------------------------------------------------------ register bus
  task automatic wreg(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk_40); reg_wr = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk_40); reg_wr = 0;
  endtask

  task automatic rreg(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk_40); reg_rd = 1; reg_addr = a;
    @(negedge clk_40); reg_rd = 0; d = reg_rdata;
  endtask

  // ------------------------------------------------------------ peripherals
  // ASIC configuration registers (184 bits each, old contents returned)
  logic [255:0] cfg_reg [NL];
  for (genvar i = 0; i < NL; i++) begin : g_cfg
    assign cfg_sdi[i] = cfg_reg[i][183];
    always @(posedge cfg_sclk) if (!cfg_cs_n[i]) cfg_reg[i] <= {cfg_reg[i][254:0], cfg_sdo};
  end
  // SPI device: returns a fixed temperature word on device 4
  logic [15:0] spi_tx = 16'h0C80;
  always @(negedge spi_sclk) if (!spi_cs_n[4]) begin spi_miso <= spi_tx[15]; spi_tx <= {spi_tx[14:0], 1'b0}; end
  // I2C: a slave that acknowledges everything
  int scl_rises = 0;
  always @(posedge i2c_scl_o) scl_rises++;
  assign i2c_sda_i = i2c_sda_o;

  // ------------------------------------------------------------ watchdog
  initial begin
    #8ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int m_fe_ttc = 0, m_fe_reg = 0, m_global = 0, m_overflow = 0, m_stall = 0, m_code_err = 0;
  int m_trig_lost = 0, m_lane_off = 0, m_cfg = 0, m_spi = 0, m_i2c = 0, m_dbg = 0;

  function automatic int pending_hits();
    int n = 0;
    for (int i = 0; i < NL; i++) n += exp_pay[i].size();
    return n;
  endfunction

  task automatic drain();
    do @(posedge clk_40); while (models_busy() != 0);
    repeat (400) @(posedge clk_40);
  endtask

  initial begin
    logic [31:0] d, d2;
    for (int i = 0; i < NL; i++) begin push_word[i] = 0; cfg_reg[i] = '0; end
    spi_miso = 0;
    repeat (10) @(posedge clk_40);
    @(negedge clk_40); cpu_rst = 0;
    repeat (40) @(posedge clk_40);
    check(ttcrx_reset_n && qpll_reset_n, "TTC receiver and QPLL out of reset after boot");
    rreg(REG_ID, d); check(d == FW_ID, "firmware id");
    // synchronous start: TTC short command 0x04
    brcst(TTC_CMD_FE_RESET); m_fe_ttc++;
    repeat (60) @(posedge clk_40);
    rreg(REG_LANE_STAT, d); check(d[7:0] == 8'hFF, $sformatf("all lanes locked %h", d));

    $display("phase 1 at %0t", $time);
    // ---- 1. hits on every lane, L1A triggers, B-Channel off then on
    for (int k = 0; k < 6; k++) begin
      for (int i = 0; i < NL; i++) fork automatic int ii = i; send_hit(ii); join_none
      if (k % 2 == 0) l1a();
      repeat (20) @(posedge clk_40);
    end
    bch_long(32'h1111_1111, 0);                 // not enabled: dropped
    wreg(REG_CTRL, 32'h0000_05FF);              // bch_en
    bch_long(32'hB0B0_CAFE, 1);
    drain();
    check(pending_hits() == 0, $sformatf("all hits delivered (%0d left)", pending_hits()));
    check(n_trig[TRIG_SRC_L1A] == 3, $sformatf("3 L1A triggers, got %0d", n_trig[TRIG_SRC_L1A]));
    check(n_bch == 1, $sformatf("one B-Channel word, got %0d", n_bch));
    rreg(REG_HIT_CNT, d); check(d == 32'(6 * NL), $sformatf("hit counter %0d", d));

    $display("phase 2 at %0t", $time);
    // ---- 2. external and sequencer triggers
    wreg(REG_CTRL, 32'h0000_1AFF);              // ext + sequencer, no L1A
    wreg(REG_TRIG_PERIOD, 32'd100);
    for (int k = 0; k < 3; k++) begin
      @(negedge clk_40); ext_trig = 1; repeat (5) @(negedge clk_40); ext_trig = 0;
      repeat (50) @(negedge clk_40);
    end
    wreg(REG_TRIG_PERIOD, 32'd0);
    repeat (50) @(posedge clk_40);
    check(n_trig[TRIG_SRC_EXT] == 3, $sformatf("3 external triggers, got %0d", n_trig[TRIG_SRC_EXT]));
    check(n_trig[TRIG_SRC_SEQ] >= 1, $sformatf("sequencer triggers: %0d", n_trig[TRIG_SRC_SEQ]));
    wreg(REG_CTRL, 32'h0000_04FF);

    $display("phase 3 at %0t", $time);
    // ---- 3. TTC fe_reset restarts the timebase
    rreg(REG_TS_LO, d);
    brcst(TTC_CMD_FE_RESET); m_fe_ttc++;
    repeat (30) @(posedge clk_40);
    rreg(REG_TS_LO, d2);
    check(d2 < d && d2 < 32'd400, $sformatf("timebase restarted by TTC command: %0d -> %0d", d, d2));
    // other broadcast commands do not reset
    brcst(8'h08);
    repeat (5) @(posedge clk_40);
    rreg(REG_TS_LO, d);
    check(d > d2, "broadcast 0x08 does not reset");

    $display("phase 4 at %0t", $time);
    // ---- 4. disabled lane
    wreg(REG_CTRL, 32'h0000_04FE); m_lane_off++;
    check_hits = 0;
    send_hit(0);
    drain();
    rreg(REG_HIT_CNT, d);
    check(d == 0, $sformatf("disabled lane 0 sent nothing (hit counter %0d)", d));
    check_hits = 1;
    wreg(REG_CTRL, 32'h0000_04FF);

    $display("phase 5 at %0t", $time);
    // ---- 5. full data FIFO: stall and lane overflow
    host_read = 0;
    check_hits = 0;
    for (int i = 0; i < NL; i++) fork automatic int ii = i; repeat (1200) send_hit(ii); join_none
    repeat (100) @(posedge clk_40);
    drain();
    rreg(REG_XB_LEVEL, d);
    check(d == 32'd16384, $sformatf("data FIFO full: %0d words", d));
    rreg(REG_XB_STALL, d);  if (d != 0) m_stall++;
    rreg(REG_LANE_STAT, d); if (d[23:16] == 8'hFF) m_overflow++;
    check(d[23:16] == 8'hFF, $sformatf("every lane overflowed: %h", d[23:16]));
    check(d[24] == 0, "no trigger lost yet");
    // triggers keep arriving while the linker is stalled: 16 wait, the rest are lost
    for (int k = 0; k < 24; k++) begin
      @(negedge clk_40); ttc_l1a = 1; @(negedge clk_40); ttc_l1a = 0;
    end
    rreg(REG_LANE_STAT, d); if (d[24]) m_trig_lost++;
    check(d[24] == 1, "trigger loss flagged");
    host_read = 1;
    repeat (20000) @(posedge clk_40);
    check(xb_data_empty, "data FIFO drained");
    check(n_bad == 0, "no malformed packets");
    // register fe_reset clears the sticky flags
    wreg(REG_RESET, 32'h1); m_fe_reg++;
    repeat (100) @(posedge clk_40);
    rreg(REG_LANE_STAT, d);
    check(d[24:8] == 17'h0 && d[7:0] == 8'hFF, $sformatf("flags cleared, lanes relocked: %h", d));
    words.delete();
    check_hits = 1;

    $display("phase 6 at %0t", $time);
    // ---- 6. code error
    @(negedge clk_160_tp); flip[5] = 1; @(negedge clk_160_tp); flip[5] = 0;
    repeat (30) @(posedge clk_40);
    rreg(REG_LANE_STAT, d); if (d[13]) m_code_err++;
    check(d[15:8] == 8'h20, $sformatf("code error on lane 5 only: %h", d[15:8]));

    $display("phase 7 at %0t", $time);
    // ---- 7. ASIC configuration, SPI, I2C, debug
    for (int i = 0; i < CFG_WORDS; i++) wreg(REG_CFG_DATA + 16'(i), 32'h1000_0001 * (i + 1));
    wreg(REG_CFG_CTRL, 32'h8002_00B8);         // 184 bits to ASIC 2
    repeat (4 * (2 * 184 + 4)) @(posedge clk_40);
    rreg(REG_CFG_CTRL, d);
    check(d[0] == 0, "configuration finished");
    begin
      logic [255:0] w;
      w = {32'h8000_0008, 32'h7000_0007, 32'h6000_0006, 32'h5000_0005, 32'h4000_0004, 32'h3000_0003, 32'h2000_0002, 32'h1000_0001};
      check(cfg_reg[2][183:0] == w[183:0], "ASIC 2 holds the configuration word");
      if (cfg_reg[2][183:0] == w[183:0]) m_cfg++;
    end
    wreg(REG_SPI_CTRL, 32'h8000_0410);          // 16 bits from device 4
    repeat (8 * 40) @(posedge clk_40);
    rreg(REG_SPI_RX, d);
    check(d == 32'h0C80, $sformatf("SPI word %h", d));
    if (d == 32'h0C80) m_spi++;
    wreg(REG_I2C_CMD, 32'h0000_0390);           // START, 0x90, STOP
    repeat (100 * 4 * 12) @(posedge clk_40);
    rreg(REG_I2C_STAT, d);
    check(d[8] == 0 && scl_rises >= 10, $sformatf("I2C byte sent, %0d SCL pulses", scl_rises));
    if (scl_rises >= 10) m_i2c++;
    wreg(REG_DBG_SEL, 32'd0);
    repeat (3) @(posedge clk_40);
    check(dbg_out == 8'hFF, $sformatf("debug group 0 shows lane lock %h", dbg_out));
    if (dbg_out == 8'hFF) m_dbg++;

    $display("phase 8 at %0t", $time);
    // ---- 8. hits again after all that, then global reset
    for (int k = 0; k < 3; k++) begin
      for (int i = 0; i < NL; i++) fork automatic int ii = i; send_hit(ii); join_none
      repeat (30) @(posedge clk_40);
    end
    drain();
    check(pending_hits() == 0, "hits delivered after the reset sequence");
    wreg(REG_CTRL, 32'h0000_1D00);
    wreg(REG_RESET, 32'h2); m_global++;
    repeat (40) @(posedge clk_40);
    rreg(REG_CTRL, d);
    check(d == 32'h0000_04FF, $sformatf("registers back to defaults after global reset: %h", d));

    // ---- every mechanism happened
    check(n_hit > 0, "hits");
    check(n_trig[0] > 0 && n_trig[1] > 0 && n_trig[2] > 0, "all trigger sources");
    check(n_bch > 0, "B-Channel words");
    check(m_fe_ttc > 0 && m_fe_reg > 0 && m_global > 0, "all reset sources");
    check(m_stall > 0, "data FIFO back-pressure");
    check(m_overflow > 0, "lane FIFO overflow");
    check(m_trig_lost > 0, "trigger queue overflow");
    check(m_code_err > 0, "code error detection");
    check(m_lane_off > 0, "lane disable");
    check(m_cfg > 0 && m_spi > 0 && m_i2c > 0 && m_dbg > 0, "slow-control cores");
    $display("mechanisms: hits %0d, L1A %0d, ext %0d, seq %0d, B-Channel %0d, fe_reset TTC %0d reg %0d, global %0d, stall %0d, overflow %0d, trigger lost %0d, code error %0d, lane off %0d, cfg %0d, spi %0d, i2c %0d, dbg %0d",
             n_hit, n_trig[0], n_trig[1], n_trig[2], n_bch, m_fe_ttc, m_fe_reg, m_global, m_stall, m_overflow, m_trig_lost,
             m_code_err, m_lane_off, m_cfg, m_spi, m_i2c, m_dbg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

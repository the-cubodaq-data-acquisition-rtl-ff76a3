// tb_conf_regs: the register file. Checks reset values, write/read-back of
// the read/write registers, that control fields follow the writes, that
// reset, start and I2C command writes give one-cycle pulses, that status
// fields are returned at their addresses, and the one-cycle read latency.
module tb_conf_regs;
  import cubodaq_pkg::*;
  logic clk = 0, rst = 1, wr_en = 0, rd_en = 0;
  logic [15:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  ctrl_t ctrl;
  stat_t stat;
  int checks = 0, failures = 0;

  conf_regs dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); wr_en = 1; addr = a; wdata = d;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); rd_en = 1; addr = a;
    @(negedge clk); rd_en = 0; d = rdata;
  endtask

  // count pulse lengths
  int fe_pulses = 0, fe_cycles = 0, spi_pulses = 0, i2c_pulses = 0, cfg_pulses = 0;
  always @(posedge clk) if (!rst) begin
    fe_cycles  += ctrl.fe_rst_req;
    spi_pulses += ctrl.spi_start;
    i2c_pulses += ctrl.i2c_valid;
    cfg_pulses += ctrl.cfg_start;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    stat = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    rd(REG_ID, d);        check(d == FW_ID, $sformatf("id %h", d));
    rd(REG_CTRL, d);      check(d == 32'h0000_04FF, $sformatf("ctrl reset value %h", d));
    rd(16'h7777, d);      check(d == 32'hDEAD_BEEF, "unmapped address");
    wr(REG_CTRL, 32'h0000_1D5A);
    check(ctrl.lane_en == 8'h5A && ctrl.bch_en && ctrl.trig_en == 3'b111, "control fields");
    rd(REG_CTRL, d);      check(d == 32'h0000_1D5A, $sformatf("ctrl read back %h", d));
    wr(REG_TRIG_PERIOD, 32'd4000);
    check(ctrl.trig_period == 32'd4000, "sequencer period");
    wr(REG_DBG_SEL, 32'd5);
    rd(REG_DBG_SEL, d);   check(d == 32'd5 && ctrl.dbg_sel == 3'd5, "debug select");
    for (int i = 0; i < CFG_WORDS; i++) wr(REG_CFG_DATA + 16'(i), 32'hA000_0000 + i);
    for (int i = 0; i < CFG_WORDS; i++) check(ctrl.cfg_word[32*i +: 32] == 32'hA000_0000 + i, $sformatf("cfg word %0d", i));
    rd(REG_CFG_DATA + 16'd5, d); check(d == 32'hA000_0005, "cfg word read back");
    // pulses
    wr(REG_RESET, 32'h1);
    wr(REG_CFG_CTRL, 32'h8003_00B8);
    check(ctrl.cfg_nbits == 9'd184 && ctrl.cfg_asic == 3'd3, "cfg length and asic");
    wr(REG_SPI_DATA, 32'h1234_5678);
    wr(REG_SPI_CTRL, 32'h8000_0510);
    check(ctrl.spi_nbits == 6'd16 && ctrl.spi_dev == 4'd5 && ctrl.spi_wdata == 32'h1234_5678, "spi fields");
    wr(REG_I2C_CMD, 32'h0000_0591);
    check(ctrl.i2c_data == 8'h91 && ctrl.i2c_start && !ctrl.i2c_stop && ctrl.i2c_read, "i2c fields");
    repeat (3) @(posedge clk);
    check(fe_cycles == 1 && cfg_pulses == 1 && spi_pulses == 1 && i2c_pulses == 1,
          $sformatf("one-cycle pulses: %0d %0d %0d %0d", fe_cycles, cfg_pulses, spi_pulses, i2c_pulses));
    // status
    stat.lane_locked = 8'hF0; stat.lane_code_err = 8'h0F; stat.lane_overflow = 8'h81; stat.aux_lost = 1;
    stat.hit_cnt = 32'd777; stat.trig_cnt = 32'd55; stat.timebase = 64'h0123_4567_89AB_CDEF;
    stat.xb_level = 32'd100; stat.spi_rdata = 32'hBEEF; stat.i2c_rx = 8'h3C; stat.i2c_busy = 1;
    stat.cfg_rdata = {8{32'h5555_AAAA}};
    rd(REG_LANE_STAT, d); check(d == 32'h0181_0FF0, $sformatf("lane status %h", d));
    rd(REG_HIT_CNT, d);   check(d == 32'd777, "hit count");
    rd(REG_TRIG_CNT, d);  check(d == 32'd55, "trigger count");
    rd(REG_TS_LO, d);     check(d == 32'h89AB_CDEF, "timebase low");
    rd(REG_TS_HI, d);     check(d == 32'h0123_4567, "timebase high");
    rd(REG_XB_LEVEL, d);  check(d == 32'd100, "fifo level");
    rd(REG_SPI_RX, d);    check(d == 32'hBEEF, "spi rx");
    rd(REG_I2C_STAT, d);  check(d == 32'h0000_013C, $sformatf("i2c status %h", d));
    rd(REG_CFG_RBACK + 16'd7, d); check(d == 32'h5555_AAAA, "cfg read back");
    // global reset restores defaults
    @(negedge clk); rst = 1; @(negedge clk); rst = 0;
    rd(REG_CTRL, d);      check(d == 32'h0000_04FF, "ctrl after reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

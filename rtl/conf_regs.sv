// conf_regs: register file of the DAQ board firmware.
//
// The host reaches these registers through the DMA core's addressed stream:
// a 16-bit word address and 32-bit data, the address being the seek position
// in the register device file. Read/write registers hold the control fields
// of the other cores (cubodaq_pkg::ctrl_t); read-only registers return their
// status (cubodaq_pkg::stat_t). Writes to REG_RESET, to the start bit of
// REG_CFG_CTRL and REG_SPI_CTRL, and to REG_I2C_CMD produce one-cycle pulses
// rather than stored bits. The register map is in cubodaq_pkg.
//
// After reset: all lanes enabled, B-Channel words off, the L1A trigger
// source enabled, sequencer period 0 (stopped), debug group 0.
//
// Interface: wr_en with addr/wdata writes in that cycle; rd_en with addr
// returns rdata on the next cycle. Unmapped addresses read 0xDEAD_BEEF and
// ignore writes.
// The 32-bit data and 16-bit address are the paper's; the map is this
// design's.
module conf_regs
  import cubodaq_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        wr_en,
  input  logic        rd_en,
  input  logic [15:0] addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output ctrl_t       ctrl,
  input  stat_t       stat
);

  logic [31:0] rd_mux;

  always_ff @(posedge clk) begin
    if (rst) begin
      ctrl         <= '0;
      ctrl.lane_en <= '1;
      ctrl.trig_en <= 3'b001;
    end else begin
      // pulses last one cycle
      ctrl.fe_rst_req <= 1'b0;
      ctrl.gl_rst_req <= 1'b0;
      ctrl.cfg_start  <= 1'b0;
      ctrl.spi_start  <= 1'b0;
      ctrl.i2c_valid  <= 1'b0;
      if (wr_en) begin
        if (addr >= REG_CFG_DATA && addr < REG_CFG_DATA + 16'(CFG_WORDS)) begin
          ctrl.cfg_word[32*(addr - REG_CFG_DATA) +: 32] <= wdata;
        end
        unique case (addr)
          REG_CTRL: begin
            ctrl.lane_en <= wdata[7:0];
            ctrl.bch_en  <= wdata[8];
            ctrl.trig_en <= wdata[12:10];
          end
          REG_RESET: begin
            ctrl.fe_rst_req <= wdata[0];
            ctrl.gl_rst_req <= wdata[1];
          end
          REG_TRIG_PERIOD: ctrl.trig_period <= wdata;
          REG_DBG_SEL:     ctrl.dbg_sel     <= wdata[2:0];
          REG_CFG_CTRL: begin
            ctrl.cfg_nbits <= wdata[8:0];
            ctrl.cfg_asic  <= wdata[18:16];
            ctrl.cfg_start <= wdata[31];
          end
          REG_SPI_DATA: ctrl.spi_wdata <= wdata;
          REG_SPI_CTRL: begin
            ctrl.spi_nbits <= wdata[5:0];
            ctrl.spi_dev   <= wdata[11:8];
            ctrl.spi_start <= wdata[31];
          end
          REG_I2C_CMD: begin
            ctrl.i2c_data  <= wdata[7:0];
            ctrl.i2c_start <= wdata[8];
            ctrl.i2c_stop  <= wdata[9];
            ctrl.i2c_read  <= wdata[10];
            ctrl.i2c_nack  <= wdata[11];
            ctrl.i2c_valid <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    rd_mux = 32'hDEAD_BEEF;
    if (addr >= REG_CFG_DATA && addr < REG_CFG_DATA + 16'(CFG_WORDS))
      rd_mux = ctrl.cfg_word[32*(addr - REG_CFG_DATA) +: 32];
    else if (addr >= REG_CFG_RBACK && addr < REG_CFG_RBACK + 16'(CFG_WORDS))
      rd_mux = stat.cfg_rdata[32*(addr - REG_CFG_RBACK) +: 32];
    else begin
      unique case (addr)
        REG_ID:          rd_mux = FW_ID;
        REG_CTRL:        rd_mux = {19'h0, ctrl.trig_en, 1'b0, ctrl.bch_en, ctrl.lane_en};
        REG_TRIG_PERIOD: rd_mux = ctrl.trig_period;
        REG_DBG_SEL:     rd_mux = {29'h0, ctrl.dbg_sel};
        REG_LANE_STAT:   rd_mux = {7'h0, stat.aux_lost, stat.lane_overflow, stat.lane_code_err, stat.lane_locked};
        REG_XB_LEVEL:    rd_mux = stat.xb_level;
        REG_XB_STALL:    rd_mux = stat.xb_stall;
        REG_TRIG_CNT:    rd_mux = stat.trig_cnt;
        REG_HIT_CNT:     rd_mux = stat.hit_cnt;
        REG_TS_LO:       rd_mux = stat.timebase[31:0];
        REG_TS_HI:       rd_mux = stat.timebase[63:32];
        REG_CFG_CTRL:    rd_mux = {31'h0, stat.cfg_busy};
        REG_SPI_DATA:    rd_mux = ctrl.spi_wdata;
        REG_SPI_CTRL:    rd_mux = {31'h0, stat.spi_busy};
        REG_SPI_RX:      rd_mux = stat.spi_rdata;
        REG_I2C_STAT:    rd_mux = {22'h0, stat.i2c_ack_err, stat.i2c_busy, stat.i2c_rx};
        default:         ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst)        rdata <= '0;
    else if (rd_en) rdata <= rd_mux;
  end

endmodule

// cubodaq_fw: FPGA firmware of the CuboDAQ DAQ board.
//
// Data path (fe_reset domain): each of the N_LANES TOFPET2 serial lines is
// received by an rx_lane (deserializer, 8b10b decoder and word framer on
// clk_160, then a 64x64 dual-clock FIFO to clk_40). The linker merges the
// lanes' 64-bit hit words with triggers (trig_gen) and, when enabled, the
// TTC long-format B-Channel words into 128-bit packets with 64-bit
// timestamps; xb_adapter splits them into 32-bit words that wait in the
// 16384-word data FIFO until the host DMA core reads them. As in the
// firmware diagram, fe_reset covers the receivers, the linker, the splitter
// and the data FIFO; trig_gen, the registers and the slow-control cores sit
// outside that domain and are reset by global_reset only.
//
// Control: conf_regs is reached through the DMA core's register stream;
// reset_ctrl makes fe_reset (TTC short command 0x04 or register) and
// global_reset (register or CPU boot); tofpet_cfg, spi_master, i2c_master
// and dbg_mux serve the ASIC configuration bus, the sensors and EEPROMs, an
// I2C bus and the debug connector.
//
// Clocks: clk_40 (system), clk_160 (receivers) and clk_160_tp (the ASICs'
// clock) come from the board PLLs, which are outside this module; all three
// are in phase with the TTC clock. Resets are made in clk_40 and reach the
// 160 MHz domains through two-flop synchronizers.
//
// The TTC receiver ASIC's outputs enter as plain signals: L1A, the 8-bit
// short broadcast command with its strobe and the 32-bit long-format word
// with its strobe. The DMA core's data FIFO read port and register bus are
// ports too.
// The block structure, widths and depths are the paper's; the register map,
// packet field layout and every protocol detail the paper leaves open are
// this design's (see the module headers).
module cubodaq_fw
  import cubodaq_pkg::*;
#(
  parameter int N_LANES = 8
) (
  input  logic               clk_40,
  input  logic               clk_160,
  input  logic               clk_160_tp,
  input  logic               cpu_rst,
  // TOFPET2 ASICs
  input  logic [N_LANES-1:0] tofpet_sdata,
  output logic               tofpet_rst,
  output logic               cfg_sclk,
  output logic               cfg_sdo,
  output logic [N_LANES-1:0] cfg_cs_n,
  input  logic [N_LANES-1:0] cfg_sdi,
  // TTC receiver
  input  logic               ttc_l1a,
  input  logic               ttc_brcst_str,
  input  logic [7:0]         ttc_brcst,
  input  logic               ttc_bch_str,
  input  logic [31:0]        ttc_bch_data,
  output logic               ttcrx_reset_n,
  output logic               qpll_reset_n,
  input  logic               ext_trig,
  // host DMA core: data stream and register bus
  input  logic               xb_data_rden,
  output logic [31:0]        xb_data_dout,
  output logic               xb_data_empty,
  input  logic               reg_wr,
  input  logic               reg_rd,
  input  logic [15:0]        reg_addr,
  input  logic [31:0]        reg_wdata,
  output logic [31:0]        reg_rdata,
  // board peripherals
  output logic               spi_sclk,
  output logic               spi_mosi,
  input  logic               spi_miso,
  output logic [12:0]        spi_cs_n,
  output logic               i2c_scl_o,
  output logic               i2c_sda_o,
  input  logic               i2c_sda_i,
  output logic [7:0]         dbg_out
);

  ctrl_t ctrl;
  stat_t stat;

  // ---------------------------------------------------------------- resets
  logic fe_reset, global_reset, fe_rst_ttc;
  logic [1:0] fe_rst_160, fe_rst_tp;

  assign fe_rst_ttc = ttc_brcst_str && (ttc_brcst == TTC_CMD_FE_RESET);

  reset_ctrl u_reset (
    .clk(clk_40), .fe_rst_ttc(fe_rst_ttc), .reg_fe_rst(ctrl.fe_rst_req),
    .reg_global_rst(ctrl.gl_rst_req), .cpu_rst(cpu_rst),
    .fe_reset(fe_reset), .global_reset(global_reset)
  );

  always_ff @(posedge clk_160)    fe_rst_160 <= {fe_rst_160[0], fe_reset};
  always_ff @(posedge clk_160_tp) fe_rst_tp  <= {fe_rst_tp[0], fe_reset};

  assign tofpet_rst = fe_rst_tp[1];

  always_ff @(posedge clk_40) begin
    ttcrx_reset_n <= !global_reset;
    qpll_reset_n  <= !global_reset;
  end

  // ---------------------------------------------------------------- receivers
  logic [N_LANES-1:0][63:0] lane_data;
  logic [N_LANES-1:0]       lane_empty, lane_rd, lane_locked, lane_err, lane_ovf;

  for (genvar i = 0; i < N_LANES; i++) begin : g_lane
    rx_lane u_lane (
      .clk_160(clk_160), .rst_160(fe_rst_160[1]), .sdata(tofpet_sdata[i]),
      .enable(ctrl.lane_en[i]), .clk_40(clk_40), .rst_40(fe_reset),
      .rd_en(lane_rd[i]), .rdata(lane_data[i]), .empty(lane_empty[i]),
      .locked(lane_locked[i]), .code_err(lane_err[i]), .overflow(lane_ovf[i])
    );
  end

  // ---------------------------------------------------------------- triggers
  logic       trig_valid;
  logic [1:0] trig_src;

  trig_gen u_trig (
    .clk(clk_40), .rst(global_reset), .l1a(ttc_l1a), .ext(ext_trig),
    .src_en(ctrl.trig_en), .seq_period(ctrl.trig_period),
    .trig_valid(trig_valid), .trig_src(trig_src)
  );

  // ---------------------------------------------------------------- linker
  packet_t     pkt;
  logic        pkt_valid, pkt_ready;
  logic [63:0] timebase;
  logic [31:0] hit_cnt, trig_cnt;

  linker #(.N_LANES(N_LANES)) u_linker (
    .clk(clk_40), .rst(fe_reset),
    .lane_data(lane_data), .lane_empty(lane_empty), .lane_rd(lane_rd),
    .trig_valid(trig_valid), .trig_src(trig_src),
    .bch_valid(ttc_bch_str), .bch_data(ttc_bch_data), .bch_en(ctrl.bch_en),
    .pkt_valid(pkt_valid), .pkt(pkt), .pkt_ready(pkt_ready),
    .timebase(timebase), .hit_cnt(hit_cnt), .trig_cnt(trig_cnt), .aux_lost(stat.aux_lost)
  );

  // ---------------------------------------------------------------- to host
  logic        w_valid, w_ready, xb_full;
  logic [31:0] w_data;
  logic [14:0] xb_count;
  logic [31:0] xb_stall;

  xb_adapter u_xb_adapter (
    .clk(clk_40), .rst(fe_reset), .in_valid(pkt_valid), .in_pkt(pkt), .in_ready(pkt_ready),
    .out_valid(w_valid), .out_word(w_data), .out_ready(w_ready)
  );

  assign w_ready = !xb_full;

  sync_fifo #(.WIDTH(32), .DEPTH(16384)) u_xb_fifo (
    .clk(clk_40), .rst(fe_reset), .wr_en(w_valid), .wdata(w_data), .full(xb_full),
    .rd_en(xb_data_rden), .rdata(xb_data_dout), .empty(xb_data_empty), .count(xb_count)
  );

  always_ff @(posedge clk_40) begin
    if (fe_reset)                xb_stall <= '0;
    else if (w_valid && xb_full) xb_stall <= xb_stall + 32'd1;
  end

  // ---------------------------------------------------------------- registers
  conf_regs u_regs (
    .clk(clk_40), .rst(global_reset), .wr_en(reg_wr), .rd_en(reg_rd),
    .addr(reg_addr), .wdata(reg_wdata), .rdata(reg_rdata), .ctrl(ctrl), .stat(stat)
  );

  // ---------------------------------------------------------------- slow control
  tofpet_cfg #(.N_ASIC(N_LANES)) u_cfg (
    .clk(clk_40), .rst(global_reset), .start(ctrl.cfg_start),
    .asic($clog2(N_LANES)'(ctrl.cfg_asic)), .nbits(ctrl.cfg_nbits), .wdata(ctrl.cfg_word),
    .rdata(stat.cfg_rdata), .busy(stat.cfg_busy),
    .cfg_sclk(cfg_sclk), .cfg_sdo(cfg_sdo), .cfg_cs_n(cfg_cs_n), .cfg_sdi(cfg_sdi)
  );

  spi_master #(.N_CS(13)) u_spi (
    .clk(clk_40), .rst(global_reset), .start(ctrl.spi_start), .cs_sel(ctrl.spi_dev),
    .nbits(ctrl.spi_nbits), .wdata(ctrl.spi_wdata), .rdata(stat.spi_rdata), .busy(stat.spi_busy),
    .sclk(spi_sclk), .mosi(spi_mosi), .miso(spi_miso), .cs_n(spi_cs_n)
  );

  i2c_master u_i2c (
    .clk(clk_40), .rst(global_reset), .cmd_valid(ctrl.i2c_valid), .cmd_start(ctrl.i2c_start),
    .cmd_stop(ctrl.i2c_stop), .cmd_read(ctrl.i2c_read), .cmd_nack(ctrl.i2c_nack),
    .cmd_data(ctrl.i2c_data), .rx_data(stat.i2c_rx), .ack_err(stat.i2c_ack_err), .busy(stat.i2c_busy),
    .scl_o(i2c_scl_o), .sda_o(i2c_sda_o), .sda_i(i2c_sda_i)
  );

  // ---------------------------------------------------------------- status
  assign stat.lane_locked   = BOARD_LANES'(lane_locked);
  assign stat.lane_code_err = BOARD_LANES'(lane_err);
  assign stat.lane_overflow = BOARD_LANES'(lane_ovf);
  assign stat.xb_level      = 32'(xb_count);
  assign stat.xb_stall      = xb_stall;
  assign stat.trig_cnt      = trig_cnt;
  assign stat.hit_cnt       = hit_cnt;
  assign stat.timebase      = timebase;

  // ---------------------------------------------------------------- debug
  logic [7:0][7:0] dbg_groups;

  assign dbg_groups[0] = 8'(lane_locked);
  assign dbg_groups[1] = 8'(lane_empty);
  assign dbg_groups[2] = {ttc_l1a, trig_valid, pkt_valid, pkt_ready, xb_full, xb_data_empty, fe_reset, global_reset};
  assign dbg_groups[3] = {5'h0, cfg_sclk, cfg_sdo, &cfg_cs_n};
  assign dbg_groups[4] = {5'h0, spi_sclk, spi_mosi, spi_miso};
  assign dbg_groups[5] = {5'h0, i2c_scl_o, i2c_sda_o, i2c_sda_i};
  assign dbg_groups[6] = timebase[9:2];
  assign dbg_groups[7] = 8'(lane_ovf | lane_err);

  dbg_mux u_dbg (.clk(clk_40), .sel(ctrl.dbg_sel), .groups(dbg_groups), .dbg_out(dbg_out));

endmodule

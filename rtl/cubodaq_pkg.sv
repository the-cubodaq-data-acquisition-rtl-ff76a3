// cubodaq_pkg: types and constants shared by the DAQ-board firmware.
//
// The firmware turns the 8b10b serial streams of up to eight TOFPET2 ASICs
// into 128-bit packets stamped with a 64-bit time, splits them into 32-bit
// words and buffers them for the host. This package holds the packet layout,
// the packet type codes, the register map and the control/status structs
// exchanged between the register file and the rest of the firmware.
//
// The 128-bit packet, the 64-bit timestamp in 160 MHz cycles and the 32-bit
// host words follow the paper. The field layout inside the packet, the type
// codes and every register address are this design's own choices.
package cubodaq_pkg;

  localparam int BOARD_LANES = 8;    // TOFPET2 links: 4 FE boards x 2 ASICs
  localparam int HIT_W     = 64;    // word assembled by the word framer
  localparam int PKT_W     = 128;   // packet built by the linker
  localparam int XB_W      = 32;    // word handed to the host
  localparam int TS_W      = 64;    // extended timestamp, 160 MHz cycles

  // 8b10b control characters used on the links
  localparam logic [7:0] K28_5 = 8'hBC;  // comma / idle
  localparam logic [7:0] K28_1 = 8'h3C;

  // TTC short broadcast command that requests fe_reset
  localparam logic [7:0] TTC_CMD_FE_RESET = 8'h04;

  typedef enum logic [3:0] {
    PKT_NONE = 4'h0,
    PKT_HIT  = 4'h1,
    PKT_TRIG = 4'h2,
    PKT_BCH  = 4'h3
  } pkt_type_e;

  typedef enum logic [1:0] {
    TRIG_SRC_L1A = 2'd0,
    TRIG_SRC_EXT = 2'd1,
    TRIG_SRC_SEQ = 2'd2
  } trig_src_e;

  // Packet layout, bit 127 first
  typedef struct packed {
    pkt_type_e   ptype;     // [127:124]
    logic [3:0]  source;    // [123:120] lane for hits, trig_src_e for triggers
    logic [7:0]  reserved;  // [119:112]
    logic [47:0] payload;   // [111:64]
    logic [63:0] timestamp; // [63:0]
  } packet_t;

  // ------------------------------------------------------------------
  // Register map (word addresses on the 16-bit register bus)
  // ------------------------------------------------------------------
  localparam logic [15:0] REG_ID          = 16'h0000; // RO  firmware id
  localparam logic [15:0] REG_CTRL        = 16'h0001; // RW  control bits
  localparam logic [15:0] REG_RESET       = 16'h0002; // WO  bit0 fe_reset, bit1 global_reset
  localparam logic [15:0] REG_TRIG_PERIOD = 16'h0003; // RW  sequencer period (clk_40 cycles)
  localparam logic [15:0] REG_DBG_SEL     = 16'h0004; // RW  debug group
  localparam logic [15:0] REG_LANE_STAT   = 16'h0010; // RO  [7:0] locked, [15:8] code err, [23:16] overflow, [24] trigger/B-Channel lost
  localparam logic [15:0] REG_XB_LEVEL    = 16'h0011; // RO  data FIFO fill level
  localparam logic [15:0] REG_XB_STALL    = 16'h0012; // RO  cycles the splitter waited on a full data FIFO
  localparam logic [15:0] REG_TRIG_CNT    = 16'h0013; // RO  triggers packed
  localparam logic [15:0] REG_HIT_CNT     = 16'h0014; // RO  hits packed
  localparam logic [15:0] REG_TS_LO       = 16'h0015; // RO  timebase, low word
  localparam logic [15:0] REG_TS_HI       = 16'h0016; // RO  timebase, high word
  localparam logic [15:0] REG_CFG_DATA    = 16'h0100; // RW  0x100..0x107 config word, word 0 = bits 31:0
  localparam logic [15:0] REG_CFG_CTRL    = 16'h0108; // W: [8:0] nbits, [18:16] asic, bit 31 start; R: bit0 busy
  localparam logic [15:0] REG_CFG_RBACK   = 16'h0110; // RO  0x110..0x117 captured word
  localparam logic [15:0] REG_SPI_DATA    = 16'h0200; // RW  data to send
  localparam logic [15:0] REG_SPI_CTRL    = 16'h0201; // W: [5:0] nbits, [11:8] device, bit 31 start; R: bit0 busy
  localparam logic [15:0] REG_SPI_RX      = 16'h0202; // RO  received bits
  localparam logic [15:0] REG_I2C_CMD     = 16'h0300; // W: [7:0] data, 8 start, 9 stop, 10 read, 11 nack
  localparam logic [15:0] REG_I2C_STAT    = 16'h0301; // R: [7:0] rx, 8 busy, 9 ack_err

  localparam logic [31:0] FW_ID = 32'hC0B0_0001;

  localparam int CFG_WORDS = 8;              // 256-bit TOFPET configuration buffer

  // Control fields driven by the register file
  typedef struct packed {
    logic [BOARD_LANES-1:0] lane_en;      // CTRL[7:0]
    logic               bch_en;       // CTRL[8]   add long B-Channel words to the stream
    logic [2:0]         trig_en;      // CTRL[12:10] L1A, ext, sequencer
    logic [31:0]        trig_period;
    logic [2:0]         dbg_sel;
    logic               fe_rst_req;   // one-cycle pulses
    logic               gl_rst_req;
    logic               cfg_start;
    logic [8:0]         cfg_nbits;
    logic [2:0]         cfg_asic;
    logic [CFG_WORDS*32-1:0] cfg_word;
    logic               spi_start;
    logic [5:0]         spi_nbits;
    logic [3:0]         spi_dev;
    logic [31:0]        spi_wdata;
    logic               i2c_valid;
    logic               i2c_start;
    logic               i2c_stop;
    logic               i2c_read;
    logic               i2c_nack;
    logic [7:0]         i2c_data;
  } ctrl_t;

  // Status fields read back through the register file
  typedef struct packed {
    logic [BOARD_LANES-1:0] lane_locked;
    logic [BOARD_LANES-1:0] lane_code_err;
    logic [BOARD_LANES-1:0] lane_overflow;
    logic               aux_lost;
    logic [31:0]        xb_level;
    logic [31:0]        xb_stall;
    logic [31:0]        trig_cnt;
    logic [31:0]        hit_cnt;
    logic [63:0]        timebase;
    logic               cfg_busy;
    logic [CFG_WORDS*32-1:0] cfg_rdata;
    logic               spi_busy;
    logic [31:0]        spi_rdata;
    logic               i2c_busy;
    logic               i2c_ack_err;
    logic [7:0]         i2c_rx;
  } stat_t;

endpackage

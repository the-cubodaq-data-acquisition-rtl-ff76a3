// spi_master: SPI master for the temperature sensors and EEPROMs.
//
// Each FE board carries a board temperature sensor, a SiPM temperature
// converter and an ID EEPROM on SPI, and the DAQ board has one more EEPROM.
// One transfer moves 1 to 32 bits with one device selected: the select goes
// low, the word in wdata (right-aligned, sent MSB first) is shifted out on
// mosi while miso is shifted into rdata, then the select goes high.
//
// Mode 3: sclk idles high, mosi changes on the falling edge and miso is
// sampled on the rising edge; sclk runs at clk / (2*CLK_DIV).
//
// Interface: start (one-cycle) with cs_sel, nbits and wdata; busy is high
// until the select is released; rdata holds the received bits right-aligned
// (last bit in bit 0) from the end of the transfer.
// Timing: a transfer lasts (2*nbits + 2) * CLK_DIV cycles.
// The paper says only that these parts are read over SPI; mode, clock rate
// and transfer length are this design's choices.
module spi_master #(
  parameter int N_CS    = 13,
  parameter int CLK_DIV = 8
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            start,
  input  logic [3:0]      cs_sel,
  input  logic [5:0]      nbits,
  input  logic [31:0]     wdata,
  output logic [31:0]     rdata,
  output logic            busy,
  output logic            sclk,
  output logic            mosi,
  input  logic            miso,
  output logic [N_CS-1:0] cs_n
);

  typedef enum logic [2:0] {S_IDLE, S_LEAD, S_LOW, S_HIGH, S_TRAIL} state_e;

  state_e      state;
  logic [31:0] shreg;
  logic [5:0]  bits_left;
  logic [$clog2(CLK_DIV)-1:0] div;
  logic        tick;

  assign tick = (int'(div) == CLK_DIV - 1);
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      shreg     <= '0;
      rdata     <= '0;
      bits_left <= '0;
      div       <= '0;
      sclk      <= 1'b1;
      mosi      <= 1'b1;
      cs_n      <= '1;
    end else begin
      div <= (state == S_IDLE || tick) ? '0 : div + 1'b1;
      unique case (state)
        S_IDLE: if (start && nbits != 0 && nbits <= 6'd32) begin
          shreg     <= wdata << (6'd32 - nbits);
          bits_left <= nbits;
          rdata     <= '0;
          if (int'(cs_sel) < N_CS) cs_n[cs_sel] <= 1'b0;
          state     <= S_LEAD;
        end
        S_LEAD: if (tick) begin
          sclk  <= 1'b0;
          mosi  <= shreg[31];
          state <= S_LOW;
        end
        S_LOW: if (tick) begin
          sclk      <= 1'b1;
          rdata     <= {rdata[30:0], miso};
          shreg     <= shreg << 1;
          bits_left <= bits_left - 6'd1;
          state     <= S_HIGH;
        end
        S_HIGH: if (tick) begin
          if (bits_left == 0) begin
            state <= S_TRAIL;
          end else begin
            sclk  <= 1'b0;
            mosi  <= shreg[31];
            state <= S_LOW;
          end
        end
        S_TRAIL: if (tick) begin
          cs_n  <= '1;
          mosi  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

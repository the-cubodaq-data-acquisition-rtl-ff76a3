// tofpet_cfg: sends a configuration word to one TOFPET2 ASIC.
//
// Software writes the configuration word into the register file, then starts
// this core with the ASIC number and the word length. The core selects the
// ASIC (active-low cfg_cs_n bit), shifts nbits bits out on cfg_sdo starting
// from bit nbits-1, and shifts the bits the ASIC returns on its cfg_sdi line
// into rdata, so the previous contents of the ASIC's register can be read
// back and checked. The two ASICs of an FE board share cfg_sclk and cfg_sdo;
// only the selected one listens.
//
// Bus timing: cfg_sclk idles low; cfg_sdo changes on the falling edge and
// cfg_sdi is sampled on the rising edge; cfg_sclk runs at clk / (2*CLK_DIV).
//
// Interface: start (one-cycle) with asic, nbits (1..MAX_BITS) and wdata;
// busy high until the select is released; rdata right-aligned, last bit
// received in bit 0.
// Timing: (2*nbits + 2) * CLK_DIV cycles per transfer.
// The paper says the ASICs use a dedicated SPI-like bus that is not SPI, fed
// from registers. Its exact protocol is not given, so this core is the
// simplest shifter of that kind; word length and timing are this design's.
module tofpet_cfg #(
  parameter int MAX_BITS = 256,
  parameter int N_ASIC   = 8,
  parameter int CLK_DIV  = 4
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        start,
  input  logic [$clog2(N_ASIC)-1:0]   asic,
  input  logic [$clog2(MAX_BITS):0]   nbits,
  input  logic [MAX_BITS-1:0]         wdata,
  output logic [MAX_BITS-1:0]         rdata,
  output logic                        busy,
  output logic                        cfg_sclk,
  output logic                        cfg_sdo,
  output logic [N_ASIC-1:0]           cfg_cs_n,
  input  logic [N_ASIC-1:0]           cfg_sdi
);

  localparam int NW = $clog2(MAX_BITS) + 1;

  typedef enum logic [2:0] {S_IDLE, S_LEAD, S_HIGH, S_LOW, S_TRAIL} state_e;

  state_e                      state;
  logic [MAX_BITS-1:0]         shreg;
  logic [NW-1:0]               bits_left;
  logic [$clog2(N_ASIC)-1:0]   sel;
  logic [$clog2(CLK_DIV)-1:0]  div;
  logic                        tick;

  assign tick = (int'(div) == CLK_DIV - 1);
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      shreg     <= '0;
      rdata     <= '0;
      bits_left <= '0;
      sel       <= '0;
      div       <= '0;
      cfg_sclk  <= 1'b0;
      cfg_sdo   <= 1'b0;
      cfg_cs_n  <= '1;
    end else begin
      div <= (state == S_IDLE || tick) ? '0 : div + 1'b1;
      unique case (state)
        S_IDLE: if (start && nbits != 0 && int'(nbits) <= MAX_BITS) begin
          shreg          <= wdata << (NW'(MAX_BITS) - nbits);
          bits_left      <= nbits;
          rdata          <= '0;
          sel            <= asic;
          cfg_cs_n[asic] <= 1'b0;
          state          <= S_LEAD;
        end
        S_LEAD: if (tick) begin
          cfg_sdo <= shreg[MAX_BITS-1];
          state   <= S_LOW;
        end
        S_LOW: if (tick) begin
          cfg_sclk  <= 1'b1;
          rdata     <= {rdata[MAX_BITS-2:0], cfg_sdi[sel]};
          shreg     <= shreg << 1;
          bits_left <= bits_left - NW'(1);
          state     <= S_HIGH;
        end
        S_HIGH: if (tick) begin
          cfg_sclk <= 1'b0;
          if (bits_left == 0) begin
            state <= S_TRAIL;
          end else begin
            cfg_sdo <= shreg[MAX_BITS-1];
            state   <= S_LOW;
          end
        end
        S_TRAIL: if (tick) begin
          cfg_cs_n <= '1;
          cfg_sdo  <= 1'b0;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

// i2c_master: byte-level I2C master.
//
// Software drives the bus one byte at a time: each command optionally sends
// a START (or repeated START) first, then either writes cmd_data and reads
// the slave's acknowledge, or reads a byte and answers ACK (cmd_nack = 0) or
// NACK, and optionally ends with a STOP. Addressing, register pointers and
// multi-byte transfers are sequences of such commands.
//
// Each bit takes four phases of CLK_DIV clk cycles: SCL low and SDA set, SCL
// high, SCL high and SDA sampled, SCL low. The outputs are open-drain
// enables: scl_o/sda_o = 0 pulls the line low, 1 releases it. Clock
// stretching and multi-master arbitration are not supported.
//
// Interface: cmd_valid (one-cycle, ignored while busy) with the command
// fields; busy high while it runs; rx_data and ack_err hold the result of
// the last command (ack_err = slave answered NACK to a written byte).
// Timing: 9 bits * 4 * CLK_DIV cycles per byte, plus 4 * CLK_DIV for each
// START and STOP.
// The paper only names an I2C core; everything here is this design's choice.
module i2c_master #(
  parameter int CLK_DIV = 100
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       cmd_valid,
  input  logic       cmd_start,
  input  logic       cmd_stop,
  input  logic       cmd_read,
  input  logic       cmd_nack,
  input  logic [7:0] cmd_data,
  output logic [7:0] rx_data,
  output logic       ack_err,
  output logic       busy,
  output logic       scl_o,
  output logic       sda_o,
  input  logic       sda_i
);

  typedef enum logic [1:0] {S_IDLE, S_START, S_BITS, S_STOP} state_e;

  state_e     state;
  logic [1:0] phase;
  logic [3:0] bitn;     // 0..7 data bits, 8 acknowledge
  logic [7:0] tx;
  logic       rd, nack, stop;
  logic [$clog2(CLK_DIV)-1:0] div;
  logic       tick;
  logic       bit_out;

  assign tick = (int'(div) == CLK_DIV - 1);
  assign busy = (state != S_IDLE);
  // value this master drives during the current bit
  assign bit_out = (bitn == 4'd8) ? (rd ? nack : 1'b1)
                                  : (rd ? 1'b1 : tx[7]);

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      phase   <= '0;
      bitn    <= '0;
      tx      <= '0;
      rd      <= 1'b0;
      nack    <= 1'b0;
      stop    <= 1'b0;
      div     <= '0;
      rx_data <= '0;
      ack_err <= 1'b0;
      scl_o   <= 1'b1;
      sda_o   <= 1'b1;
    end else begin
      div <= (state == S_IDLE || tick) ? '0 : div + 1'b1;
      if (state != S_IDLE && tick) phase <= phase + 2'd1;
      unique case (state)
        S_IDLE: begin
          phase <= '0;
          if (cmd_valid) begin
            tx      <= cmd_data;
            rd      <= cmd_read;
            nack    <= cmd_nack;
            stop    <= cmd_stop;
            bitn    <= '0;
            ack_err <= 1'b0;
            state   <= cmd_start ? S_START : S_BITS;
          end
        end
        S_START: if (tick) begin
          unique case (phase)
            2'd0: sda_o <= 1'b1;
            2'd1: scl_o <= 1'b1;
            2'd2: sda_o <= 1'b0;
            2'd3: begin scl_o <= 1'b0; state <= S_BITS; end
          endcase
        end
        S_BITS: if (tick) begin
          unique case (phase)
            2'd0: sda_o <= bit_out;
            2'd1: scl_o <= 1'b1;
            2'd2: begin
              if (bitn == 4'd8) begin
                if (!rd) ack_err <= sda_i;
              end else if (rd) begin
                rx_data <= {rx_data[6:0], sda_i};
              end
            end
            2'd3: begin
              scl_o <= 1'b0;
              tx    <= {tx[6:0], 1'b0};
              if (bitn == 4'd8) state <= stop ? S_STOP : S_IDLE;
              else              bitn  <= bitn + 4'd1;
            end
          endcase
        end
        S_STOP: if (tick) begin
          unique case (phase)
            2'd0: sda_o <= 1'b0;
            2'd1: scl_o <= 1'b1;
            2'd2: sda_o <= 1'b1;
            2'd3: state <= S_IDLE;
          endcase
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

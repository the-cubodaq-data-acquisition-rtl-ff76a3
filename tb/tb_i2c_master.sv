// tb_i2c_master: byte commands against an I2C slave model at address 0x48
// with one data register. Checks an addressed write (slave receives the byte,
// no NACK), an addressed read with NACK (master receives the byte), a NACK
// from a wrong address, START/STOP seen by the slave, and the byte time of
// 9 bits of 4*CLK_DIV cycles.
module tb_i2c_master;
  logic clk = 0, rst = 1;
  logic cmd_valid = 0, cmd_start = 0, cmd_stop = 0, cmd_read = 0, cmd_nack = 0;
  logic [7:0] cmd_data = 0, rx_data;
  logic ack_err, busy, scl_o, sda_o, sda_i;
  int checks = 0, failures = 0;

  localparam int DIV = 100;   // the module default: 100 kHz from clk_40

  i2c_master dut (.*);

  always #12.5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- slave model
  typedef enum {P_IDLE, P_ADDR, P_WR, P_RD} phase_e;
  phase_e phase = P_IDLE;
  logic s_sda = 1;
  wire  scl = scl_o;
  wire  sda = sda_o & s_sda;
  assign sda_i = sda;
  logic [7:0] sh = 0, reg_val = 8'hC3, got_byte = 0;
  int bitc = 0, starts = 0, stops = 0;
  logic rw = 0;

  always @(negedge sda) if (scl && !rst) begin phase = P_ADDR; bitc = 0; starts++; end
  always @(posedge sda) if (scl && !rst) begin phase = P_IDLE; stops++; end
  always @(posedge scl) if (phase != P_IDLE) begin
    if (bitc < 8) sh = {sh[6:0], sda};
    bitc++;
  end
  always @(negedge scl) if (phase != P_IDLE) begin
    if (bitc == 8) begin
      case (phase)
        P_ADDR: begin
          rw = sh[0];
          s_sda = (sh[7:1] == 7'h48) ? 1'b0 : 1'b1;
          if (sh[7:1] != 7'h48) phase = P_IDLE;
        end
        P_WR: begin got_byte = sh; s_sda = 0; end
        default: s_sda = 1;
      endcase
    end else if (bitc == 9) begin
      bitc = 0; s_sda = 1;
      if (phase == P_ADDR) phase = rw ? P_RD : P_WR;
      if (phase == P_RD) s_sda = reg_val[7];
    end else if (phase == P_RD && bitc < 8) begin
      s_sda = reg_val[7 - bitc];
    end
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic cmd(input bit st, input bit sp, input bit rd, input bit nk, input logic [7:0] d, output int took);
    int t0;
    @(negedge clk);
    cmd_valid = 1; cmd_start = st; cmd_stop = sp; cmd_read = rd; cmd_nack = nk; cmd_data = d;
    t0 = cyc;
    @(negedge clk); cmd_valid = 0;
    wait (!busy);
    took = cyc - t0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    repeat (5) @(posedge clk);
    check(scl_o && sda_o, "bus released after reset");
    // write 0x5A to the slave
    cmd(1, 0, 0, 0, {7'h48, 1'b0}, t);
    check(!ack_err, "address acknowledged");
    check(t >= 10 * 4 * DIV && t <= 10 * 4 * DIV + 2, $sformatf("START + byte took %0d cycles", t));
    cmd(0, 1, 0, 0, 8'h5A, t);
    check(!ack_err, "data acknowledged");
    check(got_byte == 8'h5A, $sformatf("slave received %h", got_byte));
    check(starts == 1 && stops == 1, $sformatf("%0d START, %0d STOP", starts, stops));
    // read one byte
    cmd(1, 0, 0, 0, {7'h48, 1'b1}, t);
    check(!ack_err, "read address acknowledged");
    cmd(0, 1, 1, 1, 8'h00, t);
    check(rx_data == 8'hC3, $sformatf("master read %h", rx_data));
    check(t >= 10 * 4 * DIV && t <= 10 * 4 * DIV + 2, $sformatf("byte + STOP took %0d cycles", t));
    // wrong address
    cmd(1, 1, 0, 0, {7'h50, 1'b0}, t);
    check(ack_err, "wrong address not acknowledged");
    check(starts == 3 && stops == 3, $sformatf("%0d START, %0d STOP", starts, stops));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_spi_master: SPI transfers against a mode-3 slave model.
// Checks, for several lengths and devices, the bits the slave receives, the
// bits the master returns, that only the chosen select goes low, that the
// clock idles high, and the transfer length of (2*nbits+2)*CLK_DIV cycles.
module tb_spi_master;
  logic clk = 0, rst = 1, start = 0;
  logic [3:0] cs_sel = 0;
  logic [5:0] nbits = 0;
  logic [31:0] wdata = 0, rdata;
  logic busy, sclk, mosi, miso;
  logic [12:0] cs_n;
  int checks = 0, failures = 0;

  spi_master dut (.*);

  always #12.5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // slave: shifts out on the falling edge, samples on the rising edge
  logic [31:0] s_tx, s_rx;
  logic        s_sel;
  int          s_edges;
  assign s_sel = !cs_n[cs_sel];
  always @(negedge sclk) if (s_sel) begin miso <= s_tx[31]; s_tx <= s_tx << 1; end
  always @(posedge sclk) if (s_sel) begin s_rx <= {s_rx[30:0], mosi}; s_edges++; end

  int other_low = 0, cyc = 0;
  logic [12:0] sel_mask;
  assign sel_mask = ~(13'(1) << cs_sel);
  always @(posedge clk) begin
    cyc++;
    if (!rst && ((~cs_n) & sel_mask) != 13'(0)) other_low++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int lens [5] = '{8, 16, 24, 32, 1};
    int t0, t1;
    logic [31:0] s_word, mask;
    miso = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    repeat (3) @(posedge clk);
    check(sclk && cs_n == '1, "bus idle after reset");
    for (int k = 0; k < 5; k++) begin
      s_word = $urandom;
      s_tx = s_word << (32 - lens[k]);
      s_rx = 0; s_edges = 0;
      @(negedge clk);
      cs_sel = 4'(k * 3 % 13); nbits = 6'(lens[k]); wdata = $urandom; start = 1;
      t0 = cyc;
      @(negedge clk); start = 0;
      wait (!busy);
      t1 = cyc;
      mask = (lens[k] == 32) ? 32'hFFFF_FFFF : ((32'd1 << lens[k]) - 1);
      check(s_edges == lens[k], $sformatf("%0d clock edges, want %0d", s_edges, lens[k]));
      check((s_rx & mask) == (wdata & mask), $sformatf("slave got %h, sent %h", s_rx & mask, wdata & mask));
      check(rdata == (s_word & mask), $sformatf("master got %h, slave sent %h", rdata, s_word & mask));
      check((t1 - t0) >= (2 * lens[k] + 2) * 8 && (t1 - t0) <= (2 * lens[k] + 2) * 8 + 2,
            $sformatf("transfer of %0d bits took %0d cycles", lens[k], t1 - t0));
      check(sclk && cs_n == '1, "bus idle after transfer");
    end
    check(other_low == 0, "no other select asserted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_async_fifo: dual-clock FIFO at its default 64 x 64 size, 160 MHz write
// clock and 40 MHz read clock. Checks order and content under random traffic,
// that full rises after exactly 64 words with the reader stopped, that
// writes while full are ignored, and that empty returns after draining.
module tb_async_fifo;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic wr_en = 0, rd_en = 0;
  logic [63:0] wdata = 0, rdata;
  logic full, empty;
  int checks = 0, failures = 0;
  logic [63:0] model[$];

  async_fifo dut (.*);

  always #3.125 wclk = ~wclk;
  always #12.5  rclk = ~rclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reader: pops with random gaps and checks against the model
  bit reading = 0;
  always @(posedge rclk) begin
    if (rd_en && !empty) begin
      check(model.size() != 0 && rdata == model[0], $sformatf("read %h", rdata));
      if (model.size() != 0) void'(model.pop_front());
    end
  end
  always @(negedge rclk) rd_en <= reading && ($urandom % 4 != 0);

  initial begin
    int nfull;
    repeat (4) @(posedge rclk);
    wrst = 0; rrst = 0;
    // fill with the reader stopped
    nfull = 0;
    for (int i = 0; i < 70; i++) begin
      @(negedge wclk);
      wr_en = 1; wdata = {$urandom, $urandom};
      if (!full) begin model.push_back(wdata); nfull++; end
    end
    @(negedge wclk); wr_en = 0;
    check(full, "full with reader stopped");
    check(nfull == 64, $sformatf("accepted %0d words before full", nfull));
    // drain everything
    reading = 1;
    repeat (400) @(posedge rclk);
    check(empty && model.size() == 0, "drained");
    // random traffic on both sides
    for (int i = 0; i < 2000; i++) begin
      @(negedge wclk);
      wr_en = ($urandom % 8 == 0);
      wdata = {$urandom, $urandom};
      if (wr_en && !full) model.push_back(wdata);
    end
    @(negedge wclk); wr_en = 0;
    repeat (400) @(posedge rclk);
    check(empty && model.size() == 0, "drained after random traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

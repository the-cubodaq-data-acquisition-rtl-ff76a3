// tb_sync_fifo: data FIFO at its default 16384 x 32 size. Fills it to full
// (exactly 16384 words), checks count, that a write while full is ignored,
// then reads everything back in order while writing, and checks empty.
module tb_sync_fifo;
  logic clk = 0, rst = 1;
  logic wr_en = 0, rd_en = 0;
  logic [31:0] wdata = 0, rdata;
  logic full, empty;
  logic [14:0] count;
  int checks = 0, failures = 0;
  logic [31:0] model[$];

  sync_fifo dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rd_en && !empty) begin
      if (rdata != model[0]) begin failures++; $display("FAIL read %h want %h", rdata, model[0]); end
      void'(model.pop_front());
    end
    if (wr_en && !full) model.push_back(wdata);
  end

  initial begin
    int errs;
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk);
    check(empty && count == 0, "empty after reset");
    for (int i = 0; i < 16384; i++) begin
      wr_en = 1; wdata = $urandom; @(negedge clk);
    end
    check(full && count == 15'd16384, $sformatf("full at 16384, count %0d", count));
    wdata = 32'hDEAD; @(negedge clk);
    check(count == 15'd16384, "write while full ignored");
    wr_en = 0;
    // read while writing a few
    errs = failures;
    for (int i = 0; i < 20000; i++) begin
      rd_en = 1; wr_en = (i < 100); wdata = $urandom; @(negedge clk);
    end
    rd_en = 0; wr_en = 0;
    checks++;
    check(failures == errs, "all words read in order");
    check(empty && count == 0 && model.size() == 0, "empty after draining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

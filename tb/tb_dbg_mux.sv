// tb_dbg_mux: every group selected in turn with random contents; checks the
// pin value one cycle later.
module tb_dbg_mux;
  logic clk = 0;
  logic [2:0] sel = 0;
  logic [7:0][7:0] groups = '0;
  logic [7:0] dbg_out;
  int checks = 0, failures = 0;

  dbg_mux dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      sel = 3'(k % 8);
      for (int g = 0; g < 8; g++) groups[g] = 8'($urandom);
      @(posedge clk); #1;
      checks++;
      if (dbg_out != groups[sel]) begin failures++; $display("FAIL sel %0d: %h", sel, dbg_out); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

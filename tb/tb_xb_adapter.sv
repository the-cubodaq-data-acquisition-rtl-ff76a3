// tb_xb_adapter: random packets through the splitter with random source
// gaps and random sink back-pressure. Checks that each packet leaves as its
// four 32-bit words, low word first, that a continuous stream runs at one
// word per cycle (four cycles per packet), and that a stalled word is held.
module tb_xb_adapter;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [127:0] in_pkt = 0;
  logic [31:0] out_word;
  int checks = 0, failures = 0;
  logic [31:0] exp[$];

  xb_adapter dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  bit rand_mode = 0;
  int nwords = 0;
  always @(posedge clk) if (!rst) begin
    if (in_valid && in_ready) for (int i = 0; i < 4; i++) exp.push_back(in_pkt[32*i +: 32]);
    if (out_valid && out_ready) begin
      nwords++;
      check(exp.size() != 0 && out_word == exp[0], $sformatf("word %h", out_word));
      if (exp.size() != 0) void'(exp.pop_front());
    end
  end

  always @(negedge clk) begin
    if (!rst) begin
      if (!in_valid || in_ready) begin
        in_valid <= rand_mode ? ($urandom % 2 == 0) : 1'b1;
        in_pkt   <= {$urandom, $urandom, $urandom, $urandom};
      end
      out_ready <= rand_mode ? ($urandom % 3 != 0) : 1'b1;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    repeat (10) @(posedge clk);
    n0 = nwords;
    repeat (400) @(posedge clk);
    check(nwords - n0 == 400, $sformatf("full rate: %0d words in 400 cycles", nwords - n0));
    rand_mode = 1;
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

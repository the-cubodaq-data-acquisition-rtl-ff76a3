// tb_word_framer: checks word assembly from decoded bytes: words after idle
// characters, back-to-back words, a word cut by a K character or an error
// (dropped), and the byte order (first byte in bits 63:56).
module tb_word_framer;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_k = 0, in_err = 0;
  logic [7:0] in_data = 0;
  logic word_valid;
  logic [63:0] word;
  int checks = 0, failures = 0;
  logic [63:0] got[$];

  word_framer dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (word_valid && !rst) got.push_back(word);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic byte_in(input logic [7:0] d, input logic k, input logic e);
    @(negedge clk); in_valid = 1; in_data = d; in_k = k; in_err = e;
    @(negedge clk); in_valid = 0; in_k = 0; in_err = 0;
  endtask

  task automatic word_in(input logic [63:0] w);
    for (int i = 7; i >= 0; i--) byte_in(w[8*i +: 8], 0, 0);
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] exp[$];
    logic [63:0] w;
    repeat (3) @(posedge clk);
    rst = 0;
    byte_in(8'hBC, 1, 0);
    for (int n = 0; n < 6; n++) begin
      w = {$urandom, $urandom};
      word_in(w); exp.push_back(w);
      if (n % 2 == 0) byte_in(8'hBC, 1, 0);   // idle between some words only
    end
    // cut by a K character after 5 bytes: dropped
    for (int i = 0; i < 5; i++) byte_in(8'(i), 0, 0);
    byte_in(8'hBC, 1, 0);
    w = 64'h0123_4567_89AB_CDEF; word_in(w); exp.push_back(w);
    // cut by a code error: dropped, then a clean word
    for (int i = 0; i < 3; i++) byte_in(8'(i), 0, 0);
    byte_in(8'h00, 0, 1);
    w = 64'hFEDC_BA98_7654_3210; word_in(w); exp.push_back(w);
    repeat (3) @(posedge clk);
    check(got.size() == exp.size(), $sformatf("%0d words, expected %0d", got.size(), exp.size()));
    for (int i = 0; i < exp.size(); i++)
      check(i < got.size() && got[i] == exp[i], $sformatf("word %0d %h vs %h", i, got[i], exp[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

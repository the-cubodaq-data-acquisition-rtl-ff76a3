// tb_des: checks comma alignment and symbol output of the deserializer.
// A random number of junk bits precedes a stream of encoded symbols
// (K28.5 then data); after lock every symbol sent must come out in order,
// one every 10 cycles. A second run shifts the stream by 3 bits mid-way and
// checks that the deserializer realigns on the next comma.
module tb_des;
  import enc8b10b_pkg::*;

  logic clk = 0, rst = 1, sdata = 0;
  logic [9:0] sym;
  logic sym_valid, locked;
  int checks = 0, failures = 0;

  des dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [9:0] sent[$];
  logic [9:0] got[$];
  int gap_bad = 0, last_t = -1;

  always @(posedge clk) if (sym_valid && !rst) begin
    got.push_back(sym);
    if (last_t >= 0 && (int'($time / 10) - last_t) != 10) gap_bad++;
    last_t = int'($time / 10);
  end

  task automatic send_bit(input logic b);
    @(negedge clk); sdata = b;
  endtask

  task automatic send_sym(input logic [9:0] s);
    for (int i = 0; i < 10; i++) send_bit(s[i]);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic rd;
    logic [9:0] s;
    int junk;
    rd = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    junk = 3 + ($urandom % 17);
    for (int i = 0; i < junk; i++) send_bit(1'b0);
    check(!locked, "not locked before a comma");
    s = encode(8'hBC, 1'b1, rd); send_sym(s); sent.push_back(s);
    for (int i = 0; i < 40; i++) begin
      s = encode(8'($urandom), 1'b0, rd); send_sym(s); sent.push_back(s);
    end
    repeat (20) send_bit(s[0]);    // flush the pipeline with anything
    check(locked, "locked after comma");
    check(got.size() >= sent.size(), $sformatf("got %0d symbols, sent %0d", got.size(), sent.size()));
    for (int i = 0; i < sent.size(); i++)
      check(i < got.size() && got[i] == sent[i], $sformatf("symbol %0d: %h vs %h", i, got[i], sent[i]));
    check(gap_bad == 0, "one symbol every 10 cycles");
    // slip by 3 bits, then send a comma: must realign
    got.delete(); sent.delete(); last_t = -1;
    repeat (3) send_bit(1'b1);
    got.delete();
    s = encode(8'hBC, 1'b1, rd); send_sym(s); sent.push_back(s);
    for (int i = 0; i < 10; i++) begin
      s = encode(8'($urandom), 1'b0, rd); send_sym(s); sent.push_back(s);
    end
    repeat (20) send_bit(1'b0);
    // the first symbols after the slip may be garbage: find the comma
    while (got.size() != 0 && got[0] != sent[0]) void'(got.pop_front());
    for (int i = 0; i < sent.size(); i++)
      check(i < got.size() && got[i] == sent[i], $sformatf("after slip, symbol %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dec_8b10b: checks the 8b10b decoder against the reference encoder.
// Sends all 256 data bytes and the 12 control characters at both running
// disparities, then an invalid symbol and a disparity violation, and checks
// byte, K flag, error flag and the one-cycle latency.
module tb_dec_8b10b;
  import enc8b10b_pkg::*;

  logic clk = 0, rst = 1;
  logic in_valid = 0;
  logic [9:0] in_sym = '0;
  logic out_valid, out_k, out_err;
  logic [7:0] out_data;
  int checks = 0, failures = 0;

  dec_8b10b dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // drive one symbol and check the decoded result one cycle later
  task automatic send(input logic [9:0] s, input logic [7:0] eb, input logic ek, input logic eerr);
    @(negedge clk); in_valid = 1; in_sym = s;
    @(negedge clk); in_valid = 0;
    check(out_valid, "valid after one cycle");
    if (!eerr) check(out_data == eb && out_k == ek && !out_err,
                     $sformatf("sym %h: got %h k%0d e%0d want %h k%0d", s, out_data, out_k, out_err, eb, ek));
    else check(out_err, $sformatf("sym %h should be flagged", s));
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic rd;
    static logic [7:0] kchars [12] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC, 8'hDC, 8'hFC, 8'hF7, 8'hFB, 8'hFD, 8'hFE};
    logic [9:0] s;
    rd = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    // every data byte twice, so that each is seen at both disparities
    for (int pass = 0; pass < 2; pass++)
      for (int b = 0; b < 256; b++) begin
        s = encode(8'(b), 1'b0, rd);
        send(s, 8'(b), 1'b0, 1'b0);
      end
    for (int pass = 0; pass < 2; pass++)
      for (int i = 0; i < 12; i++) begin
        s = encode(kchars[i], 1'b1, rd);
        send(s, kchars[i], 1'b1, 1'b0);
      end
    // an extra symbol so the running disparity is odd against the next one
    s = encode(8'h20, 1'b0, rd);   // D.00.1 is unbalanced
    send(s, 8'h20, 1'b0, 1'b0);
    // sending the same unbalanced code again violates the disparity rule
    send(s, 8'h20, 1'b0, 1'b1);
    // not a code word at all
    send(10'b0000000000, 8'h00, 1'b0, 1'b1);
    send(10'b1111111111, 8'h00, 1'b0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rx_lane: one receiver lane fed by the ASIC transmitter model.
// Checks: lock; words arrive in order and intact across the clock crossing;
// back-to-back words arrive at the link rate of one per 80 bit times
// (2e6 words/s at 160 Mbit/s, the per-ASIC rate limit); with the reader
// stopped exactly 64 words are kept and overflow is flagged; a disabled lane
// passes nothing; a flipped bit sets code_err.
module tb_rx_lane;
  logic clk_160 = 0, clk_tx = 0, clk_40 = 0;
  logic rst_160 = 1, rst_40 = 1, rst_tx = 1;
  logic sdata, enable = 1, rd_en = 0;
  logic [63:0] rdata;
  logic empty, locked, code_err, overflow;
  logic push = 0, flip = 0;
  logic [63:0] word = 0;
  int queued;
  int checks = 0, failures = 0;

  rx_lane dut (.*);
  tofpet_tx_model u_tx (.clk(clk_tx), .rst(rst_tx), .push(push), .word(word), .stamp(1'b0),
                        .flip_bit(flip), .sdata(sdata), .queued(queued));

  always #3.125 clk_160 = ~clk_160;
  initial begin #1.4; forever #3.125 clk_tx = ~clk_tx; end
  always #12.5 clk_40 = ~clk_40;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic push_word(input logic [63:0] w);
    @(negedge clk_tx); push = 1; word = w;
    @(negedge clk_tx); push = 0;
  endtask

  logic [63:0] got[$];
  realtime     t_got[$];
  bit          reading = 0;
  always @(posedge clk_40) if (!rst_40 && rd_en && !empty) begin
    got.push_back(rdata);
    t_got.push_back($realtime);
  end
  always @(negedge clk_40) rd_en <= reading;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] exp[$];
    realtime dt;
    repeat (4) @(posedge clk_40);
    rst_160 = 0; rst_40 = 0; rst_tx = 0;
    repeat (30) @(posedge clk_40);
    check(locked, "locked on idle commas");
    // 1. a burst of 20 back-to-back words
    reading = 1;
    for (int i = 0; i < 20; i++) begin
      word = {$urandom, $urandom};
      exp.push_back(word);
      push_word(word);
    end
    wait (queued == 0);
    repeat (60) @(posedge clk_40);
    check(got.size() == 20, $sformatf("20 words received, got %0d", got.size()));
    for (int i = 0; i < 20; i++) check(i < got.size() && got[i] == exp[i], $sformatf("word %0d", i));
    // 19 intervals of 80 bit times of 6.25 ns
    dt = t_got[19] - t_got[0];
    check(dt > 9400 && dt < 9600, $sformatf("burst took %0t ns, link rate 80 bit times per word", dt));
    check(!code_err && !overflow, "no error flags");
    // 2. reader stopped: 70 words, only 64 fit
    reading = 0; got.delete(); exp.delete(); t_got.delete();
    repeat (4) @(posedge clk_40);
    for (int i = 0; i < 70; i++) begin
      word = {$urandom, $urandom};
      exp.push_back(word);
      push_word(word);
    end
    wait (queued == 0);
    repeat (60) @(posedge clk_40);
    check(overflow, "overflow flagged");
    reading = 1;
    repeat (100) @(posedge clk_40);
    check(got.size() == 64, $sformatf("64 words kept, got %0d", got.size()));
    for (int i = 0; i < 64; i++) check(i < got.size() && got[i] == exp[i], $sformatf("kept word %0d", i));
    // 3. disabled lane
    got.delete();
    enable = 0;
    repeat (4) @(posedge clk_40);
    for (int i = 0; i < 5; i++) push_word({$urandom, $urandom});
    wait (queued == 0);
    repeat (60) @(posedge clk_40);
    check(got.size() == 0, "disabled lane passes nothing");
    enable = 1;
    // 4. code error
    check(!code_err, "no code error yet");
    @(negedge clk_tx); flip = 1; @(negedge clk_tx); flip = 0;
    repeat (20) @(posedge clk_40);
    check(code_err, "code error flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

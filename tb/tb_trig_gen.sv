// tb_trig_gen: trigger sources. Checks L1A pass-through with its source tag,
// one trigger per external rising edge (not per high cycle), the sequencer
// period in cycles, the enable mask, and the priority when L1A and the
// sequencer coincide.
module tb_trig_gen;
  import cubodaq_pkg::*;
  logic clk = 0, rst = 1, l1a = 0, ext = 0;
  logic [2:0] src_en = 0;
  logic [31:0] seq_period = 0;
  logic trig_valid;
  logic [1:0] trig_src;
  int checks = 0, failures = 0;
  int n[3];
  int cyc = 0;
  int seq_times[$];

  trig_gen dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (trig_valid) begin
      n[trig_src]++;
      if (trig_src == TRIG_SRC_SEQ) seq_times.push_back(cyc);
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic clear();
    for (int i = 0; i < 3; i++) n[i] = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    clear();
    // disabled sources make nothing
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); l1a = 1; @(negedge clk); l1a = 0;
    end
    repeat (5) @(negedge clk);
    check(n[0] + n[1] + n[2] == 0, "nothing while disabled");
    src_en = 3'b011;
    for (int i = 0; i < 7; i++) begin
      @(negedge clk); l1a = 1; @(negedge clk); l1a = 0;
    end
    repeat (5) @(negedge clk);
    check(n[TRIG_SRC_L1A] == 7, $sformatf("7 L1A triggers, got %0d", n[TRIG_SRC_L1A]));
    // external: long pulses, one trigger each
    for (int i = 0; i < 4; i++) begin
      #3; ext = 1; repeat (9) @(negedge clk); #2; ext = 0; repeat (6) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    check(n[TRIG_SRC_EXT] == 4, $sformatf("4 external triggers, got %0d", n[TRIG_SRC_EXT]));
    // sequencer every 25 cycles
    src_en = 3'b100; seq_period = 25; seq_times.delete();
    repeat (260) @(negedge clk);
    check(seq_times.size() == 10, $sformatf("10 sequencer triggers in 260 cycles, got %0d", seq_times.size()));
    for (int i = 1; i < seq_times.size(); i++)
      check(seq_times[i] - seq_times[i-1] == 25, $sformatf("sequencer period %0d", seq_times[i] - seq_times[i-1]));
    // L1A held high together with the sequencer: L1A wins every cycle
    src_en = 3'b101; clear();
    @(negedge clk); l1a = 1;
    repeat (60) @(negedge clk);
    l1a = 0;
    repeat (3) @(negedge clk);
    check(n[TRIG_SRC_L1A] == 60 && n[TRIG_SRC_SEQ] == 0, $sformatf("priority: %0d L1A, %0d seq", n[0], n[2]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

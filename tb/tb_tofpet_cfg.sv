// tb_tofpet_cfg: configuration transfers to ASIC models that hold a shift
// register and return its old contents on cfg_sdi. Checks the word each
// ASIC holds after a transfer, the read-back of its previous word, that
// unselected ASICs are untouched, and the transfer length.
module tb_tofpet_cfg;
  localparam int NA = 8;
  logic clk = 0, rst = 1, start = 0;
  logic [2:0] asic = 0;
  logic [8:0] nbits = 0;
  logic [255:0] wdata = 0, rdata;
  logic busy, cfg_sclk, cfg_sdo;
  logic [NA-1:0] cfg_cs_n, cfg_sdi;
  int checks = 0, failures = 0;

  tofpet_cfg dut (.*);

  always #12.5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ASIC models: register of 'len' bits, shifted on the rising edge
  logic [255:0] areg [NA];
  int           alen;
  for (genvar i = 0; i < NA; i++) begin : g_asic
    assign cfg_sdi[i] = areg[i][alen - 1];
    always @(posedge cfg_sclk) if (!cfg_cs_n[i]) areg[i] <= {areg[i][254:0], cfg_sdo};
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [255:0] w1, w2, mask, prev_w [NA];
    int t0;
    alen = 184;
    mask = (256'd1 << alen) - 1;
    for (int i = 0; i < NA; i++) areg[i] = {8{$urandom}} & mask;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int k = 0; k < 3; k++) begin
      int a;
      a = (k == 0) ? 3 : (k == 1) ? 6 : 3;
      for (int i = 0; i < NA; i++) prev_w[i] = areg[i] & mask;
      w1 = {8{$urandom}} & mask;
      @(negedge clk);
      asic = 3'(a); nbits = 9'(alen); wdata = w1; start = 1;
      t0 = cyc;
      @(negedge clk); start = 0;
      wait (!busy);
      check((cyc - t0) >= (2 * alen + 2) * 4 && (cyc - t0) <= (2 * alen + 2) * 4 + 2,
            $sformatf("transfer took %0d cycles", cyc - t0));
      check((areg[a] & mask) == w1, $sformatf("ASIC %0d holds the word", a));
      check((rdata & mask) == prev_w[a], $sformatf("read back ASIC %0d's previous word", a));
      for (int i = 0; i < NA; i++)
        if (i != a) check((areg[i] & mask) == prev_w[i], $sformatf("ASIC %0d untouched", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

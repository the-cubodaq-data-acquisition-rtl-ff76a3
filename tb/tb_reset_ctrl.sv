// tb_reset_ctrl: reset generation. Checks the power-up/boot reset held by
// cpu_rst, that the TTC command and the register request give an fe_reset
// of PULSE_LEN cycles without global_reset, and that a global request gives
// both resets for PULSE_LEN cycles.
module tb_reset_ctrl;
  logic clk = 0, fe_rst_ttc = 0, reg_fe_rst = 0, reg_global_rst = 0, cpu_rst = 1;
  logic fe_reset, global_reset;
  int checks = 0, failures = 0;

  reset_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // count how many cycles each reset stays high after a request
  task automatic measure(output int nfe, output int ngl);
    nfe = int'(fe_reset); ngl = int'(global_reset);
    for (int i = 0; i < 40; i++) begin
      @(posedge clk); #1;
      nfe += fe_reset; ngl += global_reset;
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nfe, ngl;
    repeat (30) @(posedge clk); #1;
    check(fe_reset && global_reset, "both resets while the CPU holds reset");
    @(negedge clk); cpu_rst = 0;
    repeat (40) @(posedge clk); #1;
    check(!fe_reset && !global_reset, "released after boot");
    @(negedge clk); fe_rst_ttc = 1; @(posedge clk); #1; fe_rst_ttc = 0;
    measure(nfe, ngl);
    check(nfe == 16 && ngl == 0, $sformatf("TTC fe_reset: %0d cycles, global %0d", nfe, ngl));
    @(negedge clk); reg_fe_rst = 1; @(posedge clk); #1; reg_fe_rst = 0;
    measure(nfe, ngl);
    check(nfe == 16 && ngl == 0, $sformatf("register fe_reset: %0d cycles, global %0d", nfe, ngl));
    @(negedge clk); reg_global_rst = 1; @(posedge clk); #1; reg_global_rst = 0;
    measure(nfe, ngl);
    check(nfe == 16 && ngl == 16, $sformatf("global: fe %0d, global %0d cycles", nfe, ngl));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

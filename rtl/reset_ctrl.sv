// reset_ctrl: builds the two resets of the DAQ board firmware.
//
// fe_reset clears only the data path (receivers, linker, packet splitter,
// data FIFO, timebase) and is sent to the ASICs' data transmission; the
// configuration of the FPGA and of the ASICs is kept. It is requested by the
// TTC short broadcast command 0x04, which all boards receive in the same
// clock cycle, or by a register write.
// global_reset clears everything, including the TTC receiver and the QPLL;
// it is requested by a register write or held by the CPU while it boots.
// global_reset also asserts fe_reset.
//
// Each one-cycle request starts a pulse of PULSE_LEN clk_40 cycles, long
// enough for every 160 MHz domain to see it; cpu_rst holds both resets for
// as long as it is high and PULSE_LEN cycles after.
//
// The block has no reset of its own: its registers start from their
// power-up values (the FPGA's configuration values), which hold both resets
// asserted for PULSE_LEN cycles after configuration.
//
// Interface: all inputs synchronous to clk_40 except cpu_rst, which is
// synchronized here. Outputs are registered, active high.
// Timing: fe_reset rises one cycle after fe_rst_ttc or reg_fe_rst.
// The sources and what each reset clears are the paper's; the pulse length
// is this design's.
module reset_ctrl #(
  parameter int PULSE_LEN = 16
) (
  input  logic clk,
  input  logic fe_rst_ttc,
  input  logic reg_fe_rst,
  input  logic reg_global_rst,
  input  logic cpu_rst,
  output logic fe_reset,
  output logic global_reset
);

  localparam int CW = $clog2(PULSE_LEN + 1);

  logic [1:0]    cpu_sync = 2'b11;
  logic [CW-1:0] fe_cnt = '0;
  logic [CW-1:0] gl_cnt = CW'(PULSE_LEN);
  logic          gl_req, fe_req;

  assign gl_req = reg_global_rst || cpu_sync[1];
  assign fe_req = fe_rst_ttc || reg_fe_rst || gl_req;

  always_ff @(posedge clk) begin
    cpu_sync <= {cpu_sync[0], cpu_rst};
    if (gl_req)              gl_cnt <= CW'(PULSE_LEN);
    else if (gl_cnt != '0)   gl_cnt <= gl_cnt - CW'(1);
    if (fe_req)              fe_cnt <= CW'(PULSE_LEN);
    else if (fe_cnt != '0)   fe_cnt <= fe_cnt - CW'(1);
    global_reset <= gl_req || (gl_cnt > CW'(1));
    fe_reset     <= fe_req || (fe_cnt > CW'(1));
  end

endmodule

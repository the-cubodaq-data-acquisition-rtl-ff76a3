// dbg_mux: routes one group of internal signals to the debug connector.
//
// The firmware offers N_GROUPS groups of WIDTH signals; the register-selected
// group is registered once in clk_40 and driven on the connector pins. An
// out-of-range selection drives zeros.
//
// Interface: sel (from the register file), groups (packed, group 0 in the
// low bits), dbg_out to the pins.
// Timing: one clk_40 cycle from input to pin.
// The paper gives the function only; width, group count and the register
// stage are this design's.
module dbg_mux #(
  parameter int N_GROUPS = 8,
  parameter int WIDTH    = 8
) (
  input  logic                               clk,
  input  logic [$clog2(N_GROUPS)-1:0]        sel,
  input  logic [N_GROUPS-1:0][WIDTH-1:0]     groups,
  output logic [WIDTH-1:0]                   dbg_out
);

  always_ff @(posedge clk) begin
    if (int'(sel) < N_GROUPS) dbg_out <= groups[sel];
    else                      dbg_out <= '0;
  end

endmodule

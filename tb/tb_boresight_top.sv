// tb_boresight_top: end-to-end test of the boresighting system at a reduced
// frame size (32x24 pixels) and a fast serial rate (8 clocks per bit), so
// that four video iterations run in well under a second. See
// tb_boresight_body.svh for what is driven and checked.
module tb_boresight_top;
  localparam int W = 32, H = 24, CPB = 8;
  localparam int WATCHDOG = 200000;

`include "tb_boresight_body.svh"

  boresight_top #(.HRES(W), .VRES(H), .CLKS_PER_BIT(CPB)) dut (.*);

endmodule

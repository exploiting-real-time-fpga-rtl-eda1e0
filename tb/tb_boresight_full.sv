// tb_boresight_full: the same end-to-end test as tb_boresight_top with
// boresight_top at its default parameters: 640x480 frames, 8 Kbyte program
// and 64 Kbyte data memory, 434 clocks per serial bit. Four video iterations
// of 307200 pixels each are checked pixel by pixel.
module tb_boresight_full;
  localparam int W = 640, H = 480, CPB = 434;
  localparam int WATCHDOG = 3000000;

`include "tb_boresight_body.svh"

  boresight_top dut (.*);

endmodule

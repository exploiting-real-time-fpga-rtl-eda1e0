// zbt_ctrl: controller for one bank of pipelined zero-bus-turnaround SRAM.
//
// Presents a simple port to the frame-store logic (one access per clock,
// address and write data together, read data a fixed time later) and drives
// the SRAM's pins with ZBT timing. All pin outputs come from registers: the
// request sampled on clock edge n appears on zbt_addr/zbt_cen_n/zbt_we_n
// after edge n, and the SRAM samples it at edge n+1. For a write, the data
// must be on the bus at edge n+3, two clocks after its address (late write),
// so the write data and its output enable pass through a two-stage delay
// before reaching zbt_dq_o/zbt_dq_oe. For a read the SRAM drives its data for
// edge n+3, where it is captured in an input register: rdata is valid after
// edge n+3, RD_LAT = 4 clocks after the request was presented to the port
// (the request itself is usually registered one clock earlier by the caller).
// Because a write's data phase and a read's data phase both fall two clocks
// after their address, reads and writes may follow one another with no idle
// clock, which is the point of ZBT memory.
//
// The two SRAM banks come from the board description; this controller and
// its timing are this design's choices (the original uses a platform library
// for it).
module zbt_ctrl
  import boresight_pkg::*;
#(
  parameter int unsigned AW = SRAM_AW
) (
  input  logic          clk,
  input  logic          rst_n,
  // frame-store side
  input  logic [AW-1:0] addr,
  input  logic          we,
  input  logic          re,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata,
  // SRAM pins
  output logic [AW-1:0] zbt_addr,
  output logic          zbt_cen_n,
  output logic          zbt_we_n,
  output logic [31:0]   zbt_dq_o,
  output logic          zbt_dq_oe,
  input  logic [31:0]   zbt_dq_i
);

  logic [31:0] wd1, wd2;
  logic        wv1, wv2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zbt_addr  <= '0;
      zbt_cen_n <= 1'b1;
      zbt_we_n  <= 1'b1;
      wd1 <= '0; wd2 <= '0; zbt_dq_o <= '0;
      wv1 <= 1'b0; wv2 <= 1'b0; zbt_dq_oe <= 1'b0;
      rdata <= '0;
    end else begin
      zbt_addr  <= addr;
      zbt_cen_n <= !(we || re);
      zbt_we_n  <= !we;
      // late-write data pipeline
      wd1 <= wdata;  wv1 <= we;
      wd2 <= wd1;    wv2 <= wv1;
      zbt_dq_o  <= wd2;
      zbt_dq_oe <= wv2;
      // read data capture
      rdata <= zbt_dq_i;
    end
  end

  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n) !(we && re))
    else $error("zbt_ctrl: read and write in one clock");

endmodule

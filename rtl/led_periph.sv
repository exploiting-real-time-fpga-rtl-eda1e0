// led_periph: LED register on the Sabre bus.
//
// One read/write register at offset 0; its low N_LEDS bits drive the board
// LEDs (1 = lit). Cleared by reset; accesses are acknowledged one clock after
// the strobe. The paper names this peripheral only; the register is this
// design's.
module led_periph
  import boresight_pkg::*;
#(
  parameter int unsigned N_LEDS = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  bus_req_t          bus_req,
  output bus_rsp_t          bus_rsp,
  output logic [N_LEDS-1:0] leds
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      leds    <= '0;
      bus_rsp <= '0;
    end else begin
      if (bus_req.we) leds <= bus_req.wdata[N_LEDS-1:0];
      bus_rsp.ack   <= bus_req.re || bus_req.we;
      bus_rsp.rdata <= bus_req.re ? 32'(leds) : '0;
    end
  end

endmodule

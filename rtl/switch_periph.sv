// switch_periph: board switches on the Sabre bus.
//
// The switch inputs pass through a two-flip-flop synchroniser; a read returns
// the synchronised value in the low N_SW bits, acknowledged one clock after
// the strobe. Writes are acknowledged and ignored. The paper names this
// peripheral only; the synchroniser and register are this design's.
module switch_periph
  import boresight_pkg::*;
#(
  parameter int unsigned N_SW = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  bus_req_t        bus_req,
  output bus_rsp_t        bus_rsp,
  input  logic [N_SW-1:0] switches
);

  logic [N_SW-1:0] s1, s2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
      bus_rsp <= '0;
    end else begin
      s1 <= switches;
      s2 <= s1;
      bus_rsp.ack   <= bus_req.re || bus_req.we;
      bus_rsp.rdata <= bus_req.re ? 32'(s2) : '0;
    end
  end

endmodule

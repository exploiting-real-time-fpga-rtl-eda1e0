// sabre_bus: address decoder of the Sabre peripheral bus.
//
// The Sabre processor is the only master. A request (re or we strobe for one
// clock, with address and write data) is forwarded to the slave in slot
// addr[11:8] when addr[31:12] is zero; every other slave sees no strobe. The
// slave answers one clock later with ack and read data, which the decoder
// passes back to the master, selected by the slot it registered. A request to
// an unmapped address (addr[31:12] non-zero) is acknowledged by the decoder
// itself with read data zero, so the master never waits for ever.
//
// A 32-bit bus with the Sabre as master and the peripherals in its memory
// space is the paper's. The strobe/ack timing and the address map are this
// design's.
module sabre_bus
  import boresight_pkg::*;
#(
  parameter int unsigned NS = N_SLAVES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  bus_req_t          m_req,
  output bus_rsp_t          m_rsp,
  output bus_req_t [NS-1:0] s_req,
  input  bus_rsp_t [NS-1:0] s_rsp
);

  logic                  mapped;
  logic [$clog2(NS)-1:0] slot;
  logic                  strobe;
  logic                  unmapped_q;

  assign mapped = (m_req.addr[31:12] == '0) && (32'(m_req.addr[11:8]) < NS);
  assign slot   = m_req.addr[8 +: $clog2(NS)];
  assign strobe = m_req.re || m_req.we;

  always_comb begin
    for (int i = 0; i < NS; i++) begin
      s_req[i]    = m_req;
      s_req[i].re = m_req.re && mapped && (32'(slot) == i);
      s_req[i].we = m_req.we && mapped && (32'(slot) == i);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) unmapped_q <= 1'b0;
    else        unmapped_q <= strobe && !mapped;
  end

  always_comb begin
    m_rsp = '0;
    for (int i = 0; i < NS; i++)
      if (s_rsp[i].ack) m_rsp = s_rsp[i];
    if (unmapped_q) m_rsp.ack = 1'b1;
  end

  // at most one slave may answer at a time
  logic [NS-1:0] acks;
  always_comb for (int i = 0; i < NS; i++) acks[i] = s_rsp[i].ack;

  a_one_ack: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(acks))
    else $error("sabre_bus: several slaves acknowledged together");
  a_one_strobe: assert property (@(posedge clk) disable iff (!rst_n) !(m_req.re && m_req.we))
    else $error("sabre_bus: read and write strobed together");

endmodule

// rs232_periph: serial communications peripheral on the Sabre bus.
//
// Joins a UART receiver, a receive FIFO and a UART transmitter to the bus, so
// that the processor reads sensor bytes in bursts instead of servicing every
// byte. Registers (word offset addr[2]):
//   0 DATA   read: pops the oldest received byte (0 if empty);
//            write: sends wdata[7:0] (dropped if the transmitter is busy)
//   1 STATUS bit 0 received data waiting, bit 1 transmitter busy,
//            bit 2 overflow (sticky; write 1 to bit 2 clears it),
//            bit 3 framing error seen (sticky; write 1 to bit 3 clears it),
//            bits 15:8 FIFO fill level
// A byte that arrives with the FIFO full is dropped and sets overflow. irq is
// high while data waits. Accesses are acknowledged one clock after the strobe.
// One instance serves the DMU (through the CAN-to-RS232 converter), another
// the ACC. The FIFO, its depth, 8N1 framing and the register map are this
// design's choices; the paper names the serial blocks only.
module rs232_periph
  import boresight_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 434,
  parameter int unsigned FIFO_DEPTH   = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t bus_req,
  output bus_rsp_t bus_rsp,
  input  logic     rxd,
  output logic     txd,
  output logic     irq,
  output logic     overflow_evt   // one-clock pulse when a byte is dropped
);

  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  logic [7:0] rx_data;
  logic       rx_valid, rx_ferr;
  logic       tx_busy, tx_send;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk(clk), .rst_n(rst_n), .rxd(rxd), .data(rx_data), .valid(rx_valid), .frame_err(rx_ferr));

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk(clk), .rst_n(rst_n), .send(tx_send), .data(bus_req.wdata[7:0]), .txd(txd), .busy(tx_busy));

  logic [7:0]  fifo [FIFO_DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   level;
  logic          overflow, ferr_seen;
  logic          pop, push, full, empty;

  assign full    = (level == (PW+1)'(FIFO_DEPTH));
  assign empty   = (level == '0);
  assign pop     = bus_req.re && !bus_req.addr[2] && !empty;
  assign push    = rx_valid && !full;
  assign tx_send = bus_req.we && !bus_req.addr[2];
  assign overflow_evt = rx_valid && full;

  always_ff @(posedge clk) if (push) fifo[wp] <= rx_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
      overflow <= 1'b0; ferr_seen <= 1'b0;
      bus_rsp <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      level <= level + (PW+1)'(push) - (PW+1)'(pop);
      if (bus_req.we && bus_req.addr[2]) begin
        if (bus_req.wdata[2]) overflow  <= 1'b0;
        if (bus_req.wdata[3]) ferr_seen <= 1'b0;
      end
      if (overflow_evt) overflow  <= 1'b1;
      if (rx_ferr)      ferr_seen <= 1'b1;
      bus_rsp <= '0;
      if (bus_req.re || bus_req.we) begin
        bus_rsp.ack <= 1'b1;
        if (bus_req.re) begin
          if (!bus_req.addr[2]) bus_rsp.rdata <= empty ? '0 : 32'(fifo[rp]);
          else bus_rsp.rdata <= {16'h0, 8'(level), 4'h0, ferr_seen, overflow, tx_busy, !empty};
        end
      end
    end
  end

  assign irq = !empty;

endmodule

// uart_tx: RS232 transmitter, 8 data bits, no parity, one stop bit.
//
// A send pulse while idle loads data; the block then drives a start bit (low),
// the 8 data bits least significant first and a stop bit (high), each for
// CLKS_PER_BIT clocks, with busy high throughout. A send while busy is
// ignored. txd idles high.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       send,
  input  logic [7:0] data,
  output logic       txd,
  output logic       busy
);

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic [8:0]    frame;   // stop, data[7:0]; the start bit is driven directly
  logic [3:0]    nbits;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame <= '1;
      nbits <= '0;
      cnt   <= '0;
      busy  <= 1'b0;
      txd   <= 1'b1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (send) begin
        frame <= {1'b1, data};
        nbits <= 4'd10;
        cnt   <= CW'(CLKS_PER_BIT - 1);
        busy  <= 1'b1;
        txd   <= 1'b0;
      end
    end else if (cnt == 0) begin
      cnt <= CW'(CLKS_PER_BIT - 1);
      if (nbits == 4'd1) begin
        busy <= 1'b0;
        txd  <= 1'b1;
      end else begin
        frame <= {1'b1, frame[8:1]};
        txd   <= frame[0];
      end
      nbits <= nbits - 1'b1;
    end else begin
      cnt <= cnt - 1'b1;
    end
  end

endmodule

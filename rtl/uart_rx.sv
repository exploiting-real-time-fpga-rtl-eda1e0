// uart_rx: RS232 receiver, 8 data bits, no parity, one stop bit.
//
// The serial input is synchronised with two flip-flops. A falling edge starts
// a frame; the line is sampled in the middle of the start bit (rejected if it
// is high again, a glitch), then in the middle of each of the 8 data bits,
// least significant first, and of the stop bit. When the stop bit is high
// the byte is presented on data with valid high for one clock; a low stop bit
// raises frame_err for one clock instead. CLKS_PER_BIT is the clock-to-baud
// ratio.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid,
  output logic       frame_err
);

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_t;
  state_t        state;
  logic [1:0]    sync;
  logic [CW-1:0] cnt;
  logic [2:0]    bitn;
  logic [7:0]    shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync      <= 2'b11;
      state     <= S_IDLE;
      cnt       <= '0;
      bitn      <= '0;
      shreg     <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      sync      <= {sync[0], rxd};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      case (state)
        S_IDLE: if (!sync[1]) begin
          state <= S_START;
          cnt   <= CW'(CLKS_PER_BIT / 2);
        end
        S_START: if (cnt == 0) begin
          if (!sync[1]) begin
            state <= S_DATA;
            cnt   <= CW'(CLKS_PER_BIT - 1);
            bitn  <= '0;
          end else begin
            state <= S_IDLE;
          end
        end else cnt <= cnt - 1'b1;
        S_DATA: if (cnt == 0) begin
          shreg <= {sync[1], shreg[7:1]};
          cnt   <= CW'(CLKS_PER_BIT - 1);
          if (bitn == 3'd7) state <= S_STOP;
          bitn  <= bitn + 1'b1;
        end else cnt <= cnt - 1'b1;
        S_STOP: if (cnt == 0) begin
          state <= S_IDLE;
          if (sync[1]) begin
            data  <= shreg;
            valid <= 1'b1;
          end else begin
            frame_err <= 1'b1;
          end
        end else cnt <= cnt - 1'b1;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

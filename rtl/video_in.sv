// video_in: captures one video frame into the frame store.
//
// After a start pulse the block waits for the first pixel of a frame
// (pix_sof with pix_valid), then writes each valid pixel to the next word of
// the frame store, address y*H_RES + x, until H_RES*V_RES pixels are stored.
// It then pulses done for one clock and idles. Pixels that arrive while idle
// are ignored. The write port takes one word per clock; the pixel is placed in
// bits 23:0 of the word.
//
// The paper describes this routine only by its function (take data from the
// video input and write successive frames to RAM). The pixel-stream input, the
// wait for start of frame and the linear layout are this design's choices.
module video_in
  import boresight_pkg::*;
#(
  parameter int unsigned HRES = H_RES,
  parameter int unsigned VRES = V_RES,
  parameter int unsigned AW   = SRAM_AW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          pix_valid,
  input  logic          pix_sof,
  input  logic [23:0]   pix_data,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output logic [31:0]   wr_data,
  output logic          busy,
  output logic          done
);

  localparam int unsigned NPIX = HRES * VRES;

  typedef enum logic [1:0] {S_IDLE, S_WAIT_SOF, S_CAPTURE} state_t;
  state_t        state;
  logic [AW-1:0] count;
  logic          take;

  assign take = pix_valid && ((state == S_CAPTURE) || (state == S_WAIT_SOF && pix_sof));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      count   <= '0;
      wr_en   <= 1'b0;
      wr_addr <= '0;
      wr_data <= '0;
      done    <= 1'b0;
    end else begin
      wr_en <= 1'b0;
      done  <= 1'b0;
      case (state)
        S_IDLE:     if (start) state <= S_WAIT_SOF;
        S_WAIT_SOF: if (take) state <= S_CAPTURE;
        default: ;
      endcase
      if (take) begin
        wr_en   <= 1'b1;
        wr_addr <= (state == S_WAIT_SOF) ? '0 : count;
        wr_data <= {8'h00, pix_data};
        count   <= (state == S_WAIT_SOF) ? AW'(1) : count + 1'b1;
        if (state == S_CAPTURE && count == AW'(NPIX - 1)) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
      end
    end
  end

  assign busy = (state != S_IDLE);

  initial assert (NPIX <= (1 << AW)) else $error("frame does not fit the frame store");

endmodule

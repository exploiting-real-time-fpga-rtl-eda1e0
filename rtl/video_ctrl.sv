// video_ctrl: main control loop of the video path.
//
// After reset the controller enables the frame-store and video blocks
// (S_ENABLE, one clock), then repeats: wait until the Sabre processor flags a
// new Kalman result (result_ready); acknowledge it (result_consume pulse) and
// latch the transform values; start frame capture and transformed output
// together; wait until both have reported done; swap the frame-store banks so
// that the frame just captured is the next one displayed. While waiting for
// a result the video path is stalled (stall_wait high).
//
// The loop structure (enable, wait for the Sabre, capture and output in
// parallel) is the paper's. Swapping banks once per iteration and latching
// the angle values at its start are this design's choices.
module video_ctrl
  import boresight_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      result_ready,
  output logic                      result_consume,
  input  logic [ANGLE_W-1:0]        theta_in,
  input  logic signed [COORD_W-1:0] bx_in,
  input  logic signed [COORD_W-1:0] by_in,
  output logic [ANGLE_W-1:0]        theta,
  output logic signed [COORD_W-1:0] bx,
  output logic signed [COORD_W-1:0] by,
  output logic                      enable,
  output logic                      in_start,
  output logic                      out_start,
  input  logic                      in_done,
  input  logic                      out_done,
  output logic                      bank_sel,
  output logic                      stall_wait,
  output logic                      swap
);

  typedef enum logic [1:0] {S_ENABLE, S_WAIT_SABRE, S_RUN, S_SWAP} state_t;
  state_t state;
  logic   in_fin, out_fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_ENABLE;
      enable         <= 1'b0;
      result_consume <= 1'b0;
      in_start       <= 1'b0;
      out_start      <= 1'b0;
      in_fin         <= 1'b0;
      out_fin        <= 1'b0;
      bank_sel       <= 1'b0;
      swap           <= 1'b0;
      theta          <= '0;
      bx             <= '0;
      by             <= '0;
    end else begin
      result_consume <= 1'b0;
      in_start       <= 1'b0;
      out_start      <= 1'b0;
      swap           <= 1'b0;
      case (state)
        S_ENABLE: begin
          enable <= 1'b1;
          state  <= S_WAIT_SABRE;
        end
        S_WAIT_SABRE: if (result_ready) begin
          result_consume <= 1'b1;
          theta     <= theta_in;
          bx        <= bx_in;
          by        <= by_in;
          in_start  <= 1'b1;
          out_start <= 1'b1;
          in_fin    <= 1'b0;
          out_fin   <= 1'b0;
          state     <= S_RUN;
        end
        S_RUN: begin
          if (in_done)  in_fin  <= 1'b1;
          if (out_done) out_fin <= 1'b1;
          if ((in_fin || in_done) && (out_fin || out_done)) state <= S_SWAP;
        end
        S_SWAP: begin
          bank_sel <= ~bank_sel;
          swap     <= 1'b1;
          state    <= S_WAIT_SABRE;
        end
        default: state <= S_ENABLE;
      endcase
    end
  end

  assign stall_wait = (state == S_WAIT_SABRE) && !result_ready;

endmodule

// control_regs: the twelve memory-mapped registers shared by the Sabre
// processor and the video transformation.
//
// Word offsets (addr[5:2]): 0 ROLL, 1 PITCH, 2 YAW, 3 STATUS, 4-6 roll, pitch
// and yaw covariance, 7-8 centre of rotation x/y (zero selects the frame
// centre), 9-11 general purpose. All are read/write 32-bit registers except
// STATUS bit 0 (result ready): software sets it by writing 1, and the video
// controller clears it with a one-clock result_consume pulse when it takes the
// values; if both happen in the same clock the write wins. Offsets 12-15 read
// as zero. Every access is acknowledged one clock after its strobe.
//
// The transform uses ROLL[9:0] as its rotation index (1024 steps per turn),
// YAW[11:0] as the horizontal correction bx and PITCH[11:0] as the vertical
// correction by, both signed pixels; software does the conversion from
// degrees. Twelve registers holding roll, pitch, yaw and status flags is the
// paper's; their order, the other registers and this encoding are this
// design's choices.
module control_regs
  import boresight_pkg::*;
#(
  parameter int unsigned NREGS = N_CTRL_REGS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  bus_req_t                  bus_req,
  output bus_rsp_t                  bus_rsp,
  input  logic                      result_consume,
  output logic                      result_ready,
  output logic [ANGLE_W-1:0]        theta,
  output logic signed [COORD_W-1:0] bx,
  output logic signed [COORD_W-1:0] by,
  output logic signed [COORD_W-1:0] centre_x,
  output logic signed [COORD_W-1:0] centre_y,
  output logic [NREGS-1:0][31:0]    regs
);

  logic [3:0] idx;
  assign idx = bus_req.addr[5:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs    <= '0;
      bus_rsp <= '0;
    end else begin
      bus_rsp <= '0;
      if (result_consume) regs[REG_STATUS][0] <= 1'b0;
      if (bus_req.we && 32'(idx) < NREGS) regs[idx] <= bus_req.wdata;
      if (bus_req.re || bus_req.we) begin
        bus_rsp.ack   <= 1'b1;
        bus_rsp.rdata <= (bus_req.re && 32'(idx) < NREGS) ? regs[idx] : '0;
      end
    end
  end

  assign result_ready = regs[REG_STATUS][0];
  assign theta        = regs[REG_ROLL][ANGLE_W-1:0];
  assign by           = regs[REG_PITCH][COORD_W-1:0];
  assign bx           = regs[REG_YAW][COORD_W-1:0];
  assign centre_x     = regs[REG_CENTRE_X][COORD_W-1:0];
  assign centre_y     = regs[REG_CENTRE_Y][COORD_W-1:0];

endmodule

// boresight_pkg: types and constants shared by the boresighting FPGA system.
//
// The Sabre peripheral bus is a 32-bit single-master bus. A request is a
// one-cycle strobe (re or we) carrying address and write data; the addressed
// peripheral answers in the next cycle with ack high and, for a read, the data.
// The paper gives the bus width (32 bits) and the list of peripherals; the
// strobe/ack timing and the address map below are this design's choices.
package boresight_pkg;

  typedef struct packed {
    logic [31:0] addr;
    logic [31:0] wdata;
    logic        we;
    logic        re;
  } bus_req_t;

  typedef struct packed {
    logic [31:0] rdata;
    logic        ack;
  } bus_rsp_t;

  // Peripheral slots, selected by addr[11:8]; addr[31:12] must be zero.
  localparam int unsigned N_SLAVES     = 8;
  localparam int unsigned SLOT_LEDS    = 0;
  localparam int unsigned SLOT_SWITCH  = 1;
  localparam int unsigned SLOT_TSCREEN = 2;
  localparam int unsigned SLOT_GUI     = 3;
  localparam int unsigned SLOT_SERIAL1 = 4;  // DMU (IMU via CAN-to-RS232)
  localparam int unsigned SLOT_SERIAL2 = 5;  // ACC (ADXL202 board)
  localparam int unsigned SLOT_ANGLES  = 6;  // control registers for the transform
  localparam int unsigned SLOT_BUSMEM  = 7;

  // Control register indices (word offsets within the ANGLES slot).
  localparam int unsigned N_CTRL_REGS = 12;
  localparam int unsigned REG_ROLL     = 0;
  localparam int unsigned REG_PITCH    = 1;
  localparam int unsigned REG_YAW      = 2;
  localparam int unsigned REG_STATUS   = 3;
  localparam int unsigned REG_ROLL_COV = 4;
  localparam int unsigned REG_PITCH_COV= 5;
  localparam int unsigned REG_YAW_COV  = 6;
  localparam int unsigned REG_CENTRE_X = 7;
  localparam int unsigned REG_CENTRE_Y = 8;

  // Video geometry defaults.
  localparam int unsigned H_RES  = 640;
  localparam int unsigned V_RES  = 480;
  localparam int unsigned SRAM_AW = 19;   // 2 Mbyte bank of 32-bit words
  localparam int unsigned RD_LAT  = 4;    // frame-store read latency through zbt_ctrl

  localparam int unsigned ANGLE_W = 10;   // 1024-entry sine/cosine table
  localparam int unsigned COORD_W = 12;   // signed pixel coordinate

endpackage

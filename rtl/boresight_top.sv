// boresight_top: FPGA system of the video-sensor boresighting demonstrator.
//
// A camera's misalignment to the vehicle is estimated in software by a
// Kalman filter running on the Sabre soft processor, which compares the
// accelerations reported by the vehicle IMU (DMU) and by an accelerometer on
// the camera (ACC), both read over RS232. The processor writes the resulting
// roll/pitch/yaw correction into memory-mapped control registers; the video
// path then captures camera frames into one SRAM bank while it displays the
// previous frame from the other bank, rotated and shifted by the correction.
//
// Contents: program and data block RAMs of the processor, the peripheral bus
// decoder with LED, switch, two RS232 and control-register peripherals, the
// video controller, frame capture, transformed output, the double-buffer
// bank routing and one ZBT SRAM controller per bank. The processor core
// itself, the touchscreen, GUI and bus memory peripherals, the SRAM chips and
// the video decoder/display drivers are outside this module and reach it
// through ports (the SRAM through its pins: address, chip enable, write
// enable and a split data bus, dq_o with its enable dq_oe and dq_i). As in
// the original, the processor's program and constants can be placed in the
// block RAMs with the configuration: PROG_INIT and DATA_INIT name hex
// images, empty for none. The processor drives
// imem_*, dmem_* and pbus_req; the three external peripherals answer on their
// *_rsp ports in the bus timing of sabre_bus.
//
// Timing: one clock domain. Video moves at one pixel per clock; a frame
// iteration starts only after the processor sets the result-ready status
// flag. The ev_* outputs pulse on a bank swap, a stalled wait for the
// processor, a black out-of-frame output pixel and an RS232 receive overflow.
module boresight_top
  import boresight_pkg::*;
#(
  parameter int unsigned HRES         = H_RES,
  parameter int unsigned VRES         = V_RES,
  parameter int unsigned PROG_WORDS   = 2048,    // 8 Kbyte
  parameter int unsigned DATA_WORDS   = 16384,   // 64 Kbyte
  parameter int unsigned CLKS_PER_BIT = 434,
  parameter int unsigned N_LEDS       = 8,
  parameter int unsigned N_SW         = 8,
  parameter string       PROG_INIT    = "",      // hex image of the program
  parameter string       DATA_INIT    = "",      // hex image of the constants
  parameter int unsigned PAW          = $clog2(PROG_WORDS),
  parameter int unsigned DAW          = $clog2(DATA_WORDS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // Sabre core: program memory, data memory and peripheral bus
  input  logic [PAW-1:0]              imem_addr,
  input  logic                        imem_we,
  input  logic [31:0]                 imem_wdata,
  output logic [31:0]                 imem_rdata,
  input  logic [DAW-1:0]              dmem_addr,
  input  logic                        dmem_we,
  input  logic [31:0]                 dmem_wdata,
  output logic [31:0]                 dmem_rdata,
  input  bus_req_t                    pbus_req,
  output bus_rsp_t                    pbus_rsp,
  // peripherals outside this module
  output bus_req_t                    ts_req,
  input  bus_rsp_t                    ts_rsp,
  output bus_req_t                    gui_req,
  input  bus_rsp_t                    gui_rsp,
  output bus_req_t                    busmem_req,
  input  bus_rsp_t                    busmem_rsp,
  // serial links
  input  logic                        dmu_rxd,
  output logic                        dmu_txd,
  output logic                        dmu_irq,
  input  logic                        acc_rxd,
  output logic                        acc_txd,
  output logic                        acc_irq,
  // board I/O
  output logic [N_LEDS-1:0]           leds,
  input  logic [N_SW-1:0]             switches,
  // video in / out pixel streams
  input  logic                        vin_valid,
  input  logic                        vin_sof,
  input  logic [23:0]                 vin_data,
  output logic                        vout_valid,
  output logic                        vout_sof,
  output logic [23:0]                 vout_data,
  // ZBT SRAM banks (frame store), pins of bank 0 and bank 1
  output logic [1:0][SRAM_AW-1:0]     zbt_addr,
  output logic [1:0]                  zbt_cen_n,
  output logic [1:0]                  zbt_we_n,
  output logic [1:0][31:0]            zbt_dq_o,
  output logic [1:0]                  zbt_dq_oe,
  input  logic [1:0][31:0]            zbt_dq_i,
  // events
  output logic                        ev_swap,
  output logic                        ev_stall,
  output logic                        ev_outside,
  output logic [1:0]                  ev_overflow
);

  // ---- processor memories --------------------------------------------------
  block_ram #(.DEPTH(PROG_WORDS), .INIT_FILE(PROG_INIT)) u_prog_mem (
    .clk(clk), .addr(imem_addr), .we(imem_we), .wdata(imem_wdata), .rdata(imem_rdata));
  block_ram #(.DEPTH(DATA_WORDS), .INIT_FILE(DATA_INIT)) u_data_mem (
    .clk(clk), .addr(dmem_addr), .we(dmem_we), .wdata(dmem_wdata), .rdata(dmem_rdata));

  // ---- peripheral bus --------------------------------------------------------
  bus_req_t [N_SLAVES-1:0] s_req;
  bus_rsp_t [N_SLAVES-1:0] s_rsp;

  sabre_bus u_bus (.clk(clk), .rst_n(rst_n), .m_req(pbus_req), .m_rsp(pbus_rsp),
                   .s_req(s_req), .s_rsp(s_rsp));

  led_periph #(.N_LEDS(N_LEDS)) u_leds (
    .clk(clk), .rst_n(rst_n), .bus_req(s_req[SLOT_LEDS]), .bus_rsp(s_rsp[SLOT_LEDS]), .leds(leds));

  switch_periph #(.N_SW(N_SW)) u_switches (
    .clk(clk), .rst_n(rst_n), .bus_req(s_req[SLOT_SWITCH]), .bus_rsp(s_rsp[SLOT_SWITCH]),
    .switches(switches));

  assign ts_req                = s_req[SLOT_TSCREEN];
  assign s_rsp[SLOT_TSCREEN]   = ts_rsp;
  assign gui_req               = s_req[SLOT_GUI];
  assign s_rsp[SLOT_GUI]       = gui_rsp;
  assign busmem_req            = s_req[SLOT_BUSMEM];
  assign s_rsp[SLOT_BUSMEM]    = busmem_rsp;

  rs232_periph #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_serial_dmu (
    .clk(clk), .rst_n(rst_n), .bus_req(s_req[SLOT_SERIAL1]), .bus_rsp(s_rsp[SLOT_SERIAL1]),
    .rxd(dmu_rxd), .txd(dmu_txd), .irq(dmu_irq), .overflow_evt(ev_overflow[0]));

  rs232_periph #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_serial_acc (
    .clk(clk), .rst_n(rst_n), .bus_req(s_req[SLOT_SERIAL2]), .bus_rsp(s_rsp[SLOT_SERIAL2]),
    .rxd(acc_rxd), .txd(acc_txd), .irq(acc_irq), .overflow_evt(ev_overflow[1]));

  logic                      result_ready, result_consume;
  logic [ANGLE_W-1:0]        reg_theta, theta;
  logic signed [COORD_W-1:0] reg_bx, reg_by, bx, by, centre_x, centre_y;
  logic [N_CTRL_REGS-1:0][31:0] ctrl_regs;

  control_regs u_ctrl_regs (
    .clk(clk), .rst_n(rst_n), .bus_req(s_req[SLOT_ANGLES]), .bus_rsp(s_rsp[SLOT_ANGLES]),
    .result_consume(result_consume), .result_ready(result_ready),
    .theta(reg_theta), .bx(reg_bx), .by(reg_by), .centre_x(centre_x), .centre_y(centre_y),
    .regs(ctrl_regs));

  // ---- video path ------------------------------------------------------------
  logic                in_start, out_start, in_done, out_done, in_busy, out_busy;
  logic                bank_sel, enable;
  logic                wr_en, rd_en;
  logic [SRAM_AW-1:0]  wr_addr, rd_addr;
  logic [31:0]         wr_data, rd_data;
  logic [1:0][SRAM_AW-1:0] sram_addr;
  logic [1:0]          sram_we, sram_re;
  logic [1:0][31:0]    sram_wdata, sram_rdata;

  video_ctrl u_video_ctrl (
    .clk(clk), .rst_n(rst_n), .result_ready(result_ready), .result_consume(result_consume),
    .theta_in(reg_theta), .bx_in(reg_bx), .by_in(reg_by), .theta(theta), .bx(bx), .by(by),
    .enable(enable), .in_start(in_start), .out_start(out_start),
    .in_done(in_done), .out_done(out_done), .bank_sel(bank_sel),
    .stall_wait(ev_stall), .swap(ev_swap));

  video_in #(.HRES(HRES), .VRES(VRES)) u_video_in (
    .clk(clk), .rst_n(rst_n), .start(in_start),
    .pix_valid(vin_valid && enable), .pix_sof(vin_sof), .pix_data(vin_data),
    .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data), .busy(in_busy), .done(in_done));

  video_out #(.HRES(HRES), .VRES(VRES)) u_video_out (
    .clk(clk), .rst_n(rst_n), .start(out_start), .theta(theta), .bx(bx), .by(by),
    .centre_x(centre_x), .centre_y(centre_y),
    .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(rd_data),
    .pix_valid(vout_valid), .pix_sof(vout_sof), .pix_data(vout_data),
    .busy(out_busy), .done(out_done), .outside(ev_outside));

  frame_bank_mux u_banks (
    .clk(clk), .rst_n(rst_n), .bank_sel(bank_sel),
    .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(rd_data),
    .sram_addr(sram_addr), .sram_we(sram_we), .sram_re(sram_re),
    .sram_wdata(sram_wdata), .sram_rdata(sram_rdata));

  for (genvar b = 0; b < 2; b++) begin : g_bank
    zbt_ctrl u_zbt (
      .clk(clk), .rst_n(rst_n),
      .addr(sram_addr[b]), .we(sram_we[b]), .re(sram_re[b]), .wdata(sram_wdata[b]), .rdata(sram_rdata[b]),
      .zbt_addr(zbt_addr[b]), .zbt_cen_n(zbt_cen_n[b]), .zbt_we_n(zbt_we_n[b]),
      .zbt_dq_o(zbt_dq_o[b]), .zbt_dq_oe(zbt_dq_oe[b]), .zbt_dq_i(zbt_dq_i[b]));
  end

  // a bank may only swap while neither video block is busy
  a_swap_idle: assert property (@(posedge clk) disable iff (!rst_n) ev_swap |-> (!in_busy && !out_busy))
    else $error("bank swap during a frame");

endmodule

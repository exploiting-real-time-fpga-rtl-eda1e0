// Shared body of the end-to-end testbenches of boresight_top. The including
// module defines localparams W, H (frame size) and CPB (clocks per serial
// bit) and instantiates boresight_top as dut with .* connections.
//
// The testbench plays the part of the Sabre processor and of the outside
// world: it reads sensor bytes arriving on both RS232 links, drives LEDs and
// reads switches, uses both processor memories and the external bus slots,
// and runs N_ITER video iterations. In iteration k it writes a rotation,
// shift and (in one iteration) a centre of rotation to the control
// registers, sets result-ready, and sends camera frame k. The display output
// of iteration k must be frame k-1 rotated and shifted by iteration k's
// values (black outside), compared pixel by pixel with the reference model;
// iteration 0 shows the empty bank. It counts how often each mechanism
// happened: bank swap, stall waiting for the processor, out-of-frame pixel,
// RS232 overflow, bytes received and sent; one that never happened fails.

  import boresight_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [10:0] imem_addr = '0;  logic imem_we = 0;  logic [31:0] imem_wdata = '0, imem_rdata;
  logic [13:0] dmem_addr = '0;  logic dmem_we = 0;  logic [31:0] dmem_wdata = '0, dmem_rdata;
  bus_req_t pbus_req = '0;      bus_rsp_t pbus_rsp;
  bus_req_t ts_req, gui_req, busmem_req;
  bus_rsp_t ts_rsp, gui_rsp, busmem_rsp;
  logic dmu_rxd = 1, dmu_txd, dmu_irq, acc_rxd = 1, acc_txd, acc_irq;
  logic [7:0] leds, switches = 8'h5A;
  logic vin_valid = 0, vin_sof = 0;  logic [23:0] vin_data = '0;
  logic vout_valid, vout_sof;        logic [23:0] vout_data;
  logic [1:0][18:0] zbt_addr;   logic [1:0] zbt_cen_n, zbt_we_n, zbt_dq_oe;
  logic [1:0][31:0] zbt_dq_o, zbt_dq_i;
  logic ev_swap, ev_stall, ev_outside;  logic [1:0] ev_overflow;

  localparam int N_ITER = 4;

  int checks = 0, failures = 0, cyc = 0;
  int n_swap = 0, n_stall = 0, n_outside = 0, n_overflow = 0, n_rx = 0, n_tx = 0, n_ext = 0;

  for (genvar b = 0; b < 2; b++) begin : g_sram
    zbt_sram_chip #(.AW(19)) chip (.clk(clk), .addr(zbt_addr[b]), .cen_n(zbt_cen_n[b]), .we_n(zbt_we_n[b]),
      .dq_i(zbt_dq_o[b]), .dq_oe(zbt_dq_oe[b]), .dq_o(zbt_dq_i[b]));
  end

  // external bus slaves (touchscreen, GUI, bus memory): answer with their slot
  always_ff @(posedge clk) begin
    ts_rsp.ack      <= ts_req.re || ts_req.we;      ts_rsp.rdata     <= ts_req.re ? 32'h7500_0002 : '0;
    gui_rsp.ack     <= gui_req.re || gui_req.we;    gui_rsp.rdata    <= gui_req.re ? 32'h6001_0003 : '0;
    busmem_rsp.ack  <= busmem_req.re || busmem_req.we; busmem_rsp.rdata <= busmem_req.re ? 32'hBE00_0007 : '0;
  end

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (ev_swap) n_swap++;
    if (ev_stall) n_stall++;
    if (ev_outside) n_outside++;
    if (|ev_overflow) n_overflow++;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("%s: got %0h exp %0h", what, got, exp); end
  endtask

  // ---- processor bus accesses ----------------------------------------------
  task automatic bus_wr(int slot, int off, logic [31:0] d);
    @(negedge clk); pbus_req = '0; pbus_req.addr = 32'((slot << 8) + off * 4); pbus_req.wdata = d; pbus_req.we = 1;
    @(negedge clk); pbus_req = '0;
    check("write ack", pbus_rsp.ack, 1);
  endtask

  task automatic bus_rd(int slot, int off, output logic [31:0] d);
    @(negedge clk); pbus_req = '0; pbus_req.addr = 32'((slot << 8) + off * 4); pbus_req.re = 1;
    @(negedge clk); pbus_req = '0;
    check("read ack", pbus_rsp.ack, 1);
    d = pbus_rsp.rdata;
  endtask

  // ---- serial line driver (8N1) ----------------------------------------------
  task automatic serial_send(bit acc, logic [7:0] b);
    logic [9:0] fr;
    fr = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      if (acc) acc_rxd = fr[i]; else dmu_rxd = fr[i];
      repeat (CPB) @(negedge clk);
    end
  endtask

  // ---- video source and expected output -------------------------------------
  function automatic logic [23:0] cam_pix(int frame, int a);
    return 24'((frame + 1) * 24'h0A0B0C + a * 24'h000103);
  endfunction

  int it_theta [N_ITER], it_bx [N_ITER], it_by [N_ITER], it_cx [N_ITER], it_cy [N_ITER];

  task automatic send_frame(int frame);
    repeat (4) @(negedge clk);                    // next camera frame boundary
    for (int a = 0; a < W*H; a++) begin
      @(negedge clk);
      if ($urandom_range(0, 7) == 0) begin vin_valid = 0; vin_sof = 0; @(negedge clk); end
      vin_valid = 1; vin_sof = (a == 0); vin_data = cam_pix(frame, a);
    end
    @(negedge clk) vin_valid = 0; vin_sof = 0;
  endtask

  task automatic check_output(int k, int t0);
    int idx, x, y, ex, ey, cx, cy;
    logic [23:0] exp_pix;
    idx = 0;
    cx = (it_cx[k] != 0 || it_cy[k] != 0) ? it_cx[k] : W/2;
    cy = (it_cx[k] != 0 || it_cy[k] != 0) ? it_cy[k] : H/2;
    while (idx < W*H) begin
      @(posedge clk); #1;
      if (vout_valid) begin
        if (idx == 0) check("start-to-first-pixel clocks", cyc - t0, 8 + RD_LAT);
        x = idx % W; y = idx / W;
        rotate_ref(it_theta[k], cx, cy, x, y, ex, ey);
        ex += it_bx[k]; ey += it_by[k];
        if (k == 0) exp_pix = 24'h0;
        else exp_pix = (ex >= 0 && ex < W && ey >= 0 && ey < H) ? cam_pix(k - 1, ey*W + ex) : 24'h0;
        check("output pixel", vout_data, exp_pix);
        if (idx == 0 || idx == W*H-1) check("sof", vout_sof, idx == 0);
        idx++;
      end
    end
  endtask

  // ---- the run ------------------------------------------------------------------
  initial begin
    logic [31:0] d;
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    // processor memories
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); imem_we = 1; imem_addr = 11'(i * 500); imem_wdata = 32'hC0DE_0000 + 32'(i);
      dmem_we = 1; dmem_addr = 14'(i * 4000); dmem_wdata = 32'hDA7A_0000 + 32'(i);
    end
    @(negedge clk) imem_we = 0; dmem_we = 0;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); imem_addr = 11'(i * 500); dmem_addr = 14'(i * 4000);
      @(negedge clk); check("program memory", imem_rdata, 32'hC0DE_0000 + 32'(i));
      check("data memory", dmem_rdata, 32'hDA7A_0000 + 32'(i));
    end

    // LEDs, switches, external slots
    bus_wr(SLOT_LEDS, 0, 32'h0000_00A5); check("leds", leds, 8'hA5);
    bus_rd(SLOT_SWITCH, 0, d); check("switches", d, 32'h5A);
    bus_rd(SLOT_TSCREEN, 0, d); check("touchscreen slot", d, 32'h7500_0002); n_ext++;
    bus_rd(SLOT_GUI, 0, d);     check("gui slot", d, 32'h6001_0003); n_ext++;
    bus_rd(SLOT_BUSMEM, 0, d);  check("bus memory slot", d, 32'hBE00_0007); n_ext++;

    // sensor data: DMU message of 4 bytes, ACC burst of 17 bytes (one too many)
    for (int i = 0; i < 4; i++) serial_send(0, 8'(8'hD0 + i));
    for (int i = 0; i < 17; i++) serial_send(1, 8'(8'h40 + i));
    repeat (CPB) @(negedge clk);
    check("dmu irq", dmu_irq, 1);
    for (int i = 0; i < 4; i++) begin bus_rd(SLOT_SERIAL1, 0, d); check("dmu byte", d, 8'hD0 + i); n_rx++; end
    bus_rd(SLOT_SERIAL2, 1, d); check("acc overflow flag", d[2], 1);
    for (int i = 0; i < 16; i++) begin bus_rd(SLOT_SERIAL2, 0, d); check("acc byte", d, 8'h40 + i); n_rx++; end
    // command byte to the DMU link
    bus_wr(SLOT_SERIAL1, 0, 32'h55);
    begin
      logic [7:0] got;
      wait (dmu_txd == 0);
      repeat (CPB / 2) @(negedge clk);
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(negedge clk); got[i] = dmu_txd; end
      check("dmu tx byte", got, 8'h55);
      n_tx++;
    end

    // video iterations
    for (int k = 0; k < N_ITER; k++) begin
      it_theta[k] = (k * 37 + 13) % 1024;
      it_bx[k] = k - 2; it_by[k] = 1 - k;
      it_cx[k] = (k == 2) ? W/2 + 3 : 0;
      it_cy[k] = (k == 2) ? H/2 - 2 : 0;
      repeat (20) @(negedge clk);                 // the processor is still filtering: stall
      bus_wr(SLOT_ANGLES, REG_ROLL, 32'(it_theta[k]));
      bus_wr(SLOT_ANGLES, REG_YAW, 32'(it_bx[k]));
      bus_wr(SLOT_ANGLES, REG_PITCH, 32'(it_by[k]));
      bus_wr(SLOT_ANGLES, REG_CENTRE_X, 32'(it_cx[k]));
      bus_wr(SLOT_ANGLES, REG_CENTRE_Y, 32'(it_cy[k]));
      @(negedge clk); pbus_req = '0; pbus_req.addr = 32'((SLOT_ANGLES << 8) + REG_STATUS * 4);
      pbus_req.wdata = 32'h1; pbus_req.we = 1;
      @(posedge clk); #1; t0 = cyc;
      @(negedge clk); pbus_req = '0;
      fork
        send_frame(k);
        check_output(k, t0);
      join
      wait (n_swap == k + 1);
      $display("iteration %0d done at clock %0d", k, cyc);
      bus_rd(SLOT_ANGLES, REG_STATUS, d); check("result consumed", d[0], 0);
    end

    check("bank swaps", n_swap, N_ITER);
    check("stall seen", n_stall > 0, 1);
    check("out-of-frame pixels seen", n_outside > 0, 1);
    check("overflow seen", n_overflow, 1);
    check("bytes received", n_rx, 20);
    check("bytes sent", n_tx, 1);
    check("external slots", n_ext, 3);
    checks += g_sram[0].chip.phases + g_sram[1].chip.phases;
    check("ZBT pin protocol errors", longint'(g_sram[0].chip.errors) + longint'(g_sram[1].chip.errors), 0);
    $display("events: swaps=%0d stall_clocks=%0d outside=%0d overflow=%0d rx=%0d tx=%0d",
             n_swap, n_stall, n_outside, n_overflow, n_rx, n_tx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

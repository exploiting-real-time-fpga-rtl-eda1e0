// tb_video_out: 16x12 frame store filled with known pixels; for several
// angle and offset settings the output frame is compared pixel by pixel with
// the reference rotation (black outside the frame). Also checks the delay
// from start to the first pixel (valid 6 + RD_LAT clock edges after the
// edge that samples start), sof on the first pixel only, and
// that done comes with the last of 192 pixels.
module tb_video_out;
  import tb_ref_pkg::*;
  import boresight_pkg::*;
  localparam int W = 16, H = 12;
  logic clk = 0, rst_n = 0, start = 0;
  logic [9:0] theta;
  logic signed [11:0] bx, by, cxi, cyi;
  logic rd_en, pv, psof, busy, done, outside;
  logic [18:0] ra;
  logic [31:0] rd;
  logic [23:0] pd;
  int checks = 0, failures = 0, cyc = 0, n_out = 0;

  video_out #(.HRES(W), .VRES(H)) dut (.clk(clk), .rst_n(rst_n), .start(start), .theta(theta),
    .bx(bx), .by(by), .centre_x(cxi), .centre_y(cyi), .rd_en(rd_en), .rd_addr(ra), .rd_data(rd),
    .pix_valid(pv), .pix_sof(psof), .pix_data(pd), .busy(busy), .done(done), .outside(outside));

  zbt_sram_model #(.AW(19), .LAT(RD_LAT)) ram (.clk(clk), .addr(ra), .we(1'b0), .re(rd_en), .wdata('0), .rdata(rd));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [23:0] stored(int a);
    return 24'(a * 24'h10307 + 24'h11);
  endfunction

  task automatic run_frame(int t, int ox, int oy, int ccx, int ccy);
    int start_cyc, idx, x, y, ex, ey, cx, cy;
    logic [23:0] exp_pix;
    @(negedge clk);
    theta = 10'(t); bx = 12'(ox); by = 12'(oy); cxi = 12'(ccx); cyi = 12'(ccy);
    start = 1;
    @(negedge clk) start = 0;
    start_cyc = cyc - 1;
    cx = (ccx != 0 || ccy != 0) ? ccx : W/2;
    cy = (ccx != 0 || ccy != 0) ? ccy : H/2;
    idx = 0;
    while (idx < W*H) begin
      @(posedge clk); #1;
      if (pv) begin
        x = idx % W; y = idx / W;
        rotate_ref(t, cx, cy, x, y, ex, ey);
        ex += ox; ey += oy;
        exp_pix = (ex >= 0 && ex < W && ey >= 0 && ey < H) ? stored(ey*W + ex) : 24'h0;
        checks += 3;
        if (pd !== exp_pix) begin failures++; if (failures < 10) $display("t=%0d (%0d,%0d) got %h exp %h", t, x, y, pd, exp_pix); end
        if (psof != (idx == 0)) begin failures++; $display("sof wrong at %0d", idx); end
        if (done != (idx == W*H-1)) begin failures++; $display("done wrong at %0d", idx); end
        if (outside) n_out++;
        if (idx == 0) begin
          checks++;
          if (cyc - start_cyc != 7 + RD_LAT) begin failures++; $display("first pixel after %0d clocks", cyc - start_cyc); end
        end
        idx++;
      end
    end
    @(posedge clk); #1;
    checks++;
    if (pv) begin failures++; $display("extra pixel"); end
  endtask

  initial begin
    for (int a = 0; a < W*H; a++) ram.mem[a] = {8'h0, stored(a)};
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_frame(0, 0, 0, 0, 0);       // identity
    run_frame(256, 0, 0, 0, 0);     // quarter turn
    run_frame(20, 2, -1, 0, 0);     // small roll plus shift
    run_frame(1000, -3, 2, 5, 4);   // negative angle, explicit centre
    run_frame(512, 0, 0, 0, 0);     // half turn
    checks++;
    if (n_out == 0) begin failures++; $display("no out-of-frame pixel seen"); end
    $display("out-of-frame pixels: %0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

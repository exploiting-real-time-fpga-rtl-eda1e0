// tb_table1_roll: rotation workload from the static and dynamic test results.
//
// For each roll angle reported there (true static angles of +-2 degrees and
// the estimates -2.082, 1.986, -2.152 and -2.199 degrees) the angle is
// quantised to the 1024-step table, theta = round(deg * 1024 / 360) mod 1024,
// and every position of a 640x480 raster is rotated about the frame centre
// by the pipeline at one position per clock. Each result must match the
// bit-level reference, and lie within 1 pixel of the exact rotation by the
// quantised angle and within 1 + r*pi/1024 pixels (r = distance from the
// centre) of the rotation by the unquantised angle. The worst deviation
// from the unquantised angle is printed for each case.
module tb_table1_roll;
  import tb_ref_pkg::*;
  localparam int W = 640, H = 480;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [9:0] theta = 0;
  logic signed [11:0] x = 0, y = 0, ox, oy;
  int checks = 0, failures = 0;

  affine_rotate dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .theta(theta),
    .centre_x(12'(W/2)), .centre_y(12'(H/2)), .in_x(x), .in_y(y),
    .out_valid(out_valid), .out_x(ox), .out_y(oy));

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real angles [6] = '{2.0, -2.0, -2.082, 1.986, -2.152, -2.199};
  int  q [$];
  real worst;
  int  cur_t;
  real cur_deg;

  function automatic real absr(real v); return (v < 0.0) ? -v : v; endfunction

  always @(posedge clk) begin
    #2;
    if (rst_n && out_valid) begin
      int p, px, py, ex, ey;
      real rx, ry, ax, ay, r, a, bound;
      p = q.pop_front(); px = p % W; py = p / W;
      rotate_ref(cur_t, W/2, H/2, px, py, ex, ey);
      rotate_real(cur_t, W/2, H/2, px, py, rx, ry);
      a  = cur_deg * PI / 180.0;
      ax = real'(px - W/2) * $cos(a) - real'(py - H/2) * $sin(a) + real'(W/2);
      ay = real'(py - H/2) * $cos(a) + real'(px - W/2) * $sin(a) + real'(H/2);
      r  = $sqrt(real'((px - W/2) * (px - W/2) + (py - H/2) * (py - H/2)));
      bound = 1.0 + r * PI / 1024.0;
      checks += 3;
      if (int'(ox) != ex || int'(oy) != ey) failures++;
      if (absr(real'(ox) - rx) > 1.01 || absr(real'(oy) - ry) > 1.01) failures++;
      if (absr(real'(ox) - ax) > bound || absr(real'(oy) - ay) > bound) failures++;
      if (absr(real'(ox) - ax) > worst) worst = absr(real'(ox) - ax);
      if (absr(real'(oy) - ay) > worst) worst = absr(real'(oy) - ay);
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (angles[i]) begin
      real idx;
      cur_deg = angles[i];
      idx = cur_deg * 1024.0 / 360.0;
      cur_t = ((idx >= 0.0) ? int'($floor(idx + 0.5)) : -int'($floor(-idx + 0.5)) + 1024) % 1024;
      worst = 0.0;
      for (int p = 0; p < W*H; p++) begin
        @(negedge clk);
        in_valid = 1; theta = 10'(cur_t); x = 12'(p % W); y = 12'(p / W);
        q.push_back(p);
      end
      @(negedge clk) in_valid = 0;
      repeat (8) @(negedge clk);
      checks++;
      if (q.size() != 0) failures++;
      $display("roll %f deg -> theta %0d (%f deg): worst deviation from exact angle %f px",
               cur_deg, cur_t, real'(cur_t > 511 ? cur_t - 1024 : cur_t) * 360.0 / 1024.0, worst);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

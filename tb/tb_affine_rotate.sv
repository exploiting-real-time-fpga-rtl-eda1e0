// tb_affine_rotate: drives one random coordinate and angle per clock into
// the rotation pipeline and checks every result bit-exactly against the
// reference model, within one pixel of the real-valued rotation, and that it
// appears exactly five clocks after its input.
module tb_affine_rotate;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [9:0] theta;
  logic signed [11:0] cx, cy, x, y, ox, oy;
  logic out_valid;
  int checks = 0, failures = 0;
  int cyc = 0;

  typedef struct { int t, cx, cy, x, y, cyc; } item_t;
  item_t q[$];

  affine_rotate dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .theta(theta),
    .centre_x(cx), .centre_y(cy), .in_x(x), .in_y(y),
    .out_valid(out_valid), .out_x(ox), .out_y(oy));

  function automatic real absr(real v); return (v < 0.0) ? -v : v; endfunction

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) begin
    #2;
    if (rst_n && out_valid) begin
      item_t it;
      int ex, ey;
      real rx, ry;
      it = q.pop_front();
      rotate_ref(it.t, it.cx, it.cy, it.x, it.y, ex, ey);
      rotate_real(it.t, it.cx, it.cy, it.x, it.y, rx, ry);
      checks += 3;
      if (int'(ox) != ex || int'(oy) != ey) begin
        failures++;
        if (failures < 10) $display("theta=%0d (%0d,%0d): got (%0d,%0d) exp (%0d,%0d)", it.t, it.x, it.y, ox, oy, ex, ey);
      end
      if (absr(real'(ox) - rx) > 1.01 || absr(real'(oy) - ry) > 1.01) begin
        failures++;
        if (failures < 10) $display("far from real rotation: (%0d,%0d) vs (%f,%f)", ox, oy, rx, ry);
      end
      if (cyc - it.cyc != 5) begin
        failures++;
        $display("latency %0d, expected 5", cyc - it.cyc);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      theta = 10'($urandom_range(0, 1023));
      cx = 12'($urandom_range(0, 639)); cy = 12'($urandom_range(0, 479));
      x  = 12'($urandom_range(0, 639)); y  = 12'($urandom_range(0, 479));
      if (i < 8) begin theta = 10'(i * 128); end   // the eight octants
      if (in_valid) q.push_back('{int'(theta), int'(cx), int'(cy), int'(x), int'(y), cyc});
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

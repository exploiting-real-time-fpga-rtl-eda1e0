// tb_sincos_lut: reads all 1024 angles and compares sine and cosine with
// values recomputed from $sin, one clock after the angle is applied.
module tb_sincos_lut;
  import tb_ref_pkg::*;
  logic clk = 0;
  logic [9:0] theta;
  logic signed [15:0] s, c;
  int checks = 0, failures = 0;

  sincos_lut dut (.clk(clk), .theta(theta), .sin_o(s), .cos_o(c));
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 1024; k++) begin
      theta = 10'(k);
      @(posedge clk); #1;
      checks += 2;
      if (int'(s) != sin_ref(k)) begin failures++; if (failures < 10) $display("sin(%0d)=%0d exp %0d", k, s, sin_ref(k)); end
      if (int'(c) != cos_ref(k)) begin failures++; if (failures < 10) $display("cos(%0d)=%0d exp %0d", k, c, cos_ref(k)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

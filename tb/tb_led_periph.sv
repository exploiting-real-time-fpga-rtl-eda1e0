// tb_led_periph: random values written to the LED register must appear on
// the LED outputs and read back; a read must not change the LEDs.
module tb_led_periph;
  import boresight_pkg::*;
  logic clk = 0, rst_n = 0;
  bus_req_t req = '0;
  bus_rsp_t rsp;
  logic [7:0] leds;
  int checks = 0, failures = 0;

  led_periph dut (.clk(clk), .rst_n(rst_n), .bus_req(req), .bus_rsp(rsp), .leds(leds));
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (leds != 0) failures++;
    for (int i = 0; i < 20; i++) begin
      v = 8'($urandom);
      @(negedge clk); req = '0; req.we = 1; req.wdata = 32'(v);
      @(negedge clk); req = '0;
      checks += 2; if (leds != v) failures++; if (!rsp.ack) failures++;
      @(negedge clk); req.re = 1;
      @(negedge clk); req = '0;
      checks += 2; if (rsp.rdata != 32'(v)) failures++; if (leds != v) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

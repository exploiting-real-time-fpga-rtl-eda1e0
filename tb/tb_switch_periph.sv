// tb_switch_periph: switch settings must be readable two clocks after they
// change (synchroniser), not earlier, with every read acknowledged.
module tb_switch_periph;
  import boresight_pkg::*;
  logic clk = 0, rst_n = 0;
  bus_req_t req = '0;
  bus_rsp_t rsp;
  logic [7:0] sw = 0;
  int checks = 0, failures = 0;

  switch_periph dut (.clk(clk), .rst_n(rst_n), .bus_req(req), .bus_rsp(rsp), .switches(sw));
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] old;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    for (int i = 0; i < 20; i++) begin
      old = sw;
      sw = 8'($urandom) | 8'h01;
      sw ^= (sw == old) ? 8'h80 : 8'h00;
      req = '0; req.re = 1;                    // read in the clock the switch changes
      @(negedge clk); req = '0;
      checks += 2; if (rsp.rdata != 32'(old)) failures++; if (!rsp.ack) failures++;
      @(negedge clk); req.re = 1;
      @(negedge clk); req = '0;
      checks++; if (rsp.rdata != 32'(sw)) begin failures++; $display("got %h exp %h", rsp.rdata, sw); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_control_regs: writes and reads back all twelve registers, checks that
// offsets 12-15 read zero, that every access is acknowledged one clock after
// its strobe, that roll/pitch/yaw reach the transform outputs, and the
// set-by-software / clear-by-hardware rule of the result-ready flag.
module tb_control_regs;
  import boresight_pkg::*;
  logic clk = 0, rst_n = 0, consume = 0, ready;
  bus_req_t req = '0;
  bus_rsp_t rsp;
  logic [9:0] th;
  logic signed [11:0] bx, by, cx, cy;
  logic [11:0][31:0] regs;
  int checks = 0, failures = 0;

  control_regs dut (.clk(clk), .rst_n(rst_n), .bus_req(req), .bus_rsp(rsp), .result_consume(consume),
    .result_ready(ready), .theta(th), .bx(bx), .by(by), .centre_x(cx), .centre_y(cy), .regs(regs));

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0h exp %0h", what, got, exp); end
  endtask

  task automatic bus_write(int idx, logic [31:0] d);
    @(negedge clk); req = '0; req.addr = 32'(idx * 4); req.wdata = d; req.we = 1;
    @(negedge clk); req = '0;
    check("write ack", rsp.ack, 1);
  endtask

  task automatic bus_read(int idx, output logic [31:0] d);
    @(negedge clk); req = '0; req.addr = 32'(idx * 4); req.re = 1;
    @(negedge clk); req = '0;
    check("read ack", rsp.ack, 1);
    d = rsp.rdata;
    @(negedge clk) check("ack one clock only", rsp.ack, 0);
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 12; i++) begin bus_read(i, d); check("reset value", d, 0); end
    for (int i = 0; i < 12; i++) if (i != REG_STATUS) bus_write(i, 32'h1234_0000 + 32'(i * 1111));
    for (int i = 0; i < 12; i++) if (i != REG_STATUS) begin bus_read(i, d); check("readback", d, 32'h1234_0000 + 32'(i * 1111)); end
    for (int i = 12; i < 16; i++) begin bus_write(i, 32'hFFFF_FFFF); bus_read(i, d); check("unmapped reads zero", d, 0); end
    bus_write(REG_ROLL, 32'd300);
    bus_write(REG_PITCH, 32'hFFFF_FFFB);    // -5
    bus_write(REG_YAW, 32'd7);
    bus_write(REG_CENTRE_X, 32'd320);
    bus_write(REG_CENTRE_Y, 32'd240);
    check("theta", th, 300);
    check("by", by, -5);
    check("bx", bx, 7);
    check("centre x", cx, 320);
    check("centre y", cy, 240);
    check("ready low", ready, 0);
    bus_write(REG_STATUS, 32'h1);
    check("ready set", ready, 1);
    @(negedge clk) consume = 1;
    @(negedge clk) consume = 0;
    check("ready cleared", ready, 0);
    bus_read(REG_STATUS, d); check("status reads cleared", d[0], 0);
    // software write and consume in the same clock: write wins
    @(negedge clk); req = '0; req.addr = 32'(REG_STATUS * 4); req.wdata = 1; req.we = 1; consume = 1;
    @(negedge clk); req = '0; consume = 0;
    check("write wins over consume", ready, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rs232_periph: at 8 clocks per bit, sends bytes into rxd and reads them
// back through the DATA register in order; overfills the 16-byte FIFO to
// make overflow happen (17th byte dropped, sticky flag, clear by write);
// sends a byte with a low stop bit (framing error flag); writes DATA and
// decodes the transmitted frame from txd, checking each bit time.
module tb_rs232_periph;
  import boresight_pkg::*;
  localparam int CPB = 8;
  logic clk = 0, rst_n = 0, rxd = 1, txd, irq, ovf;
  bus_req_t req = '0;
  bus_rsp_t rsp;
  int checks = 0, failures = 0, n_ovf = 0;

  rs232_periph #(.CLKS_PER_BIT(CPB), .FIFO_DEPTH(16)) dut (.clk(clk), .rst_n(rst_n), .bus_req(req), .bus_rsp(rsp),
    .rxd(rxd), .txd(txd), .irq(irq), .overflow_evt(ovf));

  always #5 clk = ~clk;
  always @(posedge clk) if (ovf) n_ovf++;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0h exp %0h", what, got, exp); end
  endtask

  task automatic bus(bit wr, int off, logic [31:0] wd, output logic [31:0] d);
    @(negedge clk); req = '0; req.addr = 32'(off * 4); req.we = wr; req.re = !wr; req.wdata = wd;
    @(negedge clk); req = '0;
    check("ack", rsp.ack, 1);
    d = rsp.rdata;
  endtask

  task automatic send_serial(logic [7:0] b, bit stop = 1);
    rxd = 0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(negedge clk); end
    rxd = stop; repeat (CPB) @(negedge clk);
    rxd = 1; repeat (2) @(negedge clk);
  endtask

  initial begin
    logic [31:0] d;
    logic [7:0] got;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    bus(0, 1, 0, d); check("status empty", d[0], 0);
    for (int i = 0; i < 5; i++) send_serial(8'(8'h31 + i * 17));
    check("irq", irq, 1);
    bus(0, 1, 0, d); check("level 5", d[15:8], 5);
    for (int i = 0; i < 5; i++) begin bus(0, 0, 0, d); check("rx byte", d, 8'(8'h31 + i * 17)); end
    bus(0, 1, 0, d); check("empty again", d[0], 0); check("irq low", irq, 0);
    // overflow
    for (int i = 0; i < 17; i++) send_serial(8'(i));
    bus(0, 1, 0, d); check("overflow flag", d[2], 1); check("level 16", d[15:8], 16);
    check("overflow events", n_ovf, 1);
    for (int i = 0; i < 16; i++) begin bus(0, 0, 0, d); check("kept byte", d, i); end
    bus(1, 1, 32'h4, d); bus(0, 1, 0, d); check("overflow cleared", d[2], 0);
    // framing error
    send_serial(8'hAA, 0);
    bus(0, 1, 0, d); check("framing flag", d[3], 1); check("bad byte not stored", d[0], 0);
    // transmit
    bus(1, 0, 32'h000000C5, d);
    bus(0, 1, 0, d); check("tx busy", d[1], 1);
    wait (txd == 0);
    repeat (CPB / 2) @(negedge clk);
    check("start bit", txd, 0);
    for (int i = 0; i < 8; i++) begin repeat (CPB) @(negedge clk); got[i] = txd; end
    repeat (CPB) @(negedge clk);
    check("stop bit", txd, 1);
    check("tx byte", got, 8'hC5);
    repeat (CPB) @(negedge clk);
    bus(0, 1, 0, d); check("tx idle", d[1], 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

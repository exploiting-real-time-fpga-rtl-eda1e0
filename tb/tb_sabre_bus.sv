// tb_sabre_bus: eight responder models, each answering one clock after its
// strobe with data naming itself. Every slot is read and written through the
// decoder: only the addressed slave may see the strobe, and the master must
// get that slave's data. Addresses above 0xFFF must reach no slave and be
// acknowledged with zero by the decoder.
module tb_sabre_bus;
  import boresight_pkg::*;
  logic clk = 0, rst_n = 0;
  bus_req_t m_req = '0;
  bus_rsp_t m_rsp;
  bus_req_t [7:0] s_req;
  bus_rsp_t [7:0] s_rsp;
  int checks = 0, failures = 0;
  int hits [8];

  sabre_bus dut (.clk(clk), .rst_n(rst_n), .m_req(m_req), .m_rsp(m_rsp), .s_req(s_req), .s_rsp(s_rsp));

  always #5 clk = ~clk;

  for (genvar g = 0; g < 8; g++) begin : g_slave
    always_ff @(posedge clk) begin
      s_rsp[g].ack   <= s_req[g].re || s_req[g].we;
      s_rsp[g].rdata <= s_req[g].re ? (32'h5100_0000 | (32'(g) << 16) | s_req[g].addr[7:0]) : '0;
      if (s_req[g].re || s_req[g].we) hits[g]++;
    end
  end

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

  task automatic access(logic [31:0] a, bit wr, output logic [31:0] d, output bit acked);
    @(negedge clk); m_req = '0; m_req.addr = a; m_req.re = !wr; m_req.we = wr; m_req.wdata = 32'h77;
    @(negedge clk); m_req = '0;
    acked = m_rsp.ack; d = m_rsp.rdata;
  endtask

  initial begin
    logic [31:0] d;
    bit ack;
    int hits0 [8];
    for (int i = 0; i < 8; i++) hits[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 8; s++) begin
      for (int k = 0; k < 2; k++) begin
        hits0 = hits;
        access(32'(s << 8) | 32'(k * 4 + 8), k == 1, d, ack);
        check("ack", ack, 1);
        if (k == 0) check("read data", d, 32'h5100_0000 | (32'(s) << 16) | 32'(8));
        for (int o = 0; o < 8; o++) check("strobe routing", hits[o] - hits0[o], (o == s) ? 1 : 0);
      end
    end
    hits0 = hits;
    access(32'h0001_0400, 0, d, ack);
    check("unmapped ack", ack, 1);
    check("unmapped data", d, 0);
    for (int o = 0; o < 8; o++) check("no slave hit", hits[o] - hits0[o], 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_zbt_ctrl: one controller in front of the ZBT SRAM chip model. Writes a
// block of words, then reads them back with reads and writes interleaved on
// consecutive clocks (no idle cycle), checking every read against a
// reference array and that its data is valid RD_LAT = 4 clock edges after
// the edge before the one that samples the request (the timing seen by a
// caller whose request comes from a register). Also checks the pin timing of a write: write enable one clock
// after the request, data and its enable three clocks after it.
module tb_zbt_ctrl;
  import boresight_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [18:0] addr = 0;
  logic we = 0, re = 0;
  logic [31:0] wdata = 0, rdata;
  logic [18:0] za;
  logic cen_n, we_n, oe;
  logic [31:0] dqo, dqi;
  logic [31:0] ref_mem [256];
  int checks = 0, failures = 0, cyc = 0;

  zbt_ctrl dut (.clk(clk), .rst_n(rst_n), .addr(addr), .we(we), .re(re), .wdata(wdata), .rdata(rdata),
    .zbt_addr(za), .zbt_cen_n(cen_n), .zbt_we_n(we_n), .zbt_dq_o(dqo), .zbt_dq_oe(oe), .zbt_dq_i(dqi));
  zbt_sram_chip #(.AW(19)) chip (.clk(clk), .addr(za), .cen_n(cen_n), .we_n(we_n), .dq_i(dqo), .dq_oe(oe), .dq_o(dqi));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int cyc; logic [31:0] exp; } rd_t;
  rd_t pend[$];

  always @(posedge clk) begin
    #1;
    if (pend.size() > 0 && cyc - pend[0].cyc == RD_LAT) begin
      rd_t r;
      r = pend.pop_front();
      checks++;
      if (rdata != r.exp) begin failures++; if (failures < 10) $display("read got %h exp %h", rdata, r.exp); end
    end
  end

  initial begin
    for (int i = 0; i < 256; i++) ref_mem[i] = 0;
    repeat (6) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // pin timing of one write
    we = 1; addr = 19'd7; wdata = 32'hCAFE_0007;
    @(negedge clk); we = 0;
    checks += 3;
    if (we_n != 0 || cen_n != 0 || za != 19'd7) begin failures++; $display("write command not on pins"); end
    @(negedge clk);
    if (oe) begin failures++; $display("data driven too early"); end
    @(negedge clk);
    if (!(oe && dqo == 32'hCAFE_0007)) begin failures++; $display("write data not 2 clocks after address"); end
    ref_mem[7] = 32'hCAFE_0007;
    repeat (3) @(negedge clk);
    // block of writes
    for (int i = 0; i < 64; i++) begin
      we = 1; re = 0; addr = 19'(i); wdata = 32'h1000_0000 + 32'(i * 3); ref_mem[i] = wdata;
      @(negedge clk);
    end
    // interleaved reads and writes, back to back
    for (int i = 0; i < 400; i++) begin
      int a;
      a = $urandom_range(0, 255);
      addr = 19'(a);
      if ($urandom_range(0, 1) == 1) begin
        we = 1; re = 0; wdata = $urandom; ref_mem[a] = wdata;
      end else begin
        we = 0; re = 1;
        pend.push_back('{cyc, ref_mem[a]});
      end
      @(negedge clk);
    end
    we = 0; re = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (pend.size() != 0) begin failures++; $display("%0d reads unanswered", pend.size()); end
    checks += chip.phases;
    failures += chip.errors;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

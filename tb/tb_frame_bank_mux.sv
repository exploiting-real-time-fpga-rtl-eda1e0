// tb_frame_bank_mux: two SRAM models behind the bank router. Writes with
// bank_sel=0 must land in bank 0 only, reads must come from bank 1, RD_LAT
// clocks later; after a swap the roles exchange. A read issued just before a swap must still
// return data from the bank it addressed.
module tb_frame_bank_mux;
  import boresight_pkg::*;
  logic clk = 0, rst_n = 0, sel = 0;
  logic wr_en = 0, rd_en = 0;
  logic [18:0] wa = 0, ra = 0;
  logic [31:0] wd = 0, rd;
  logic [1:0][18:0] sa;
  logic [1:0] swe, sre;
  logic [1:0][31:0] swd, srd;
  int checks = 0, failures = 0;

  frame_bank_mux dut (.clk(clk), .rst_n(rst_n), .bank_sel(sel), .wr_en(wr_en), .wr_addr(wa), .wr_data(wd),
    .rd_en(rd_en), .rd_addr(ra), .rd_data(rd), .sram_addr(sa), .sram_we(swe), .sram_re(sre),
    .sram_wdata(swd), .sram_rdata(srd));

  zbt_sram_model #(.AW(19), .LAT(RD_LAT)) b0 (.clk(clk), .addr(sa[0]), .we(swe[0]), .re(sre[0]), .wdata(swd[0]), .rdata(srd[0]));
  zbt_sram_model #(.AW(19), .LAT(RD_LAT)) b1 (.clk(clk), .addr(sa[1]), .we(swe[1]), .re(sre[1]), .wdata(swd[1]), .rdata(srd[1]));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    for (int a = 0; a < 16; a++) begin b0.mem[a] = 32'h0B00_0000 + 32'(a); b1.mem[a] = 32'h0B10_0000 + 32'(a); end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // bank_sel = 0: write bank 0, read bank 1, in the same clocks
    for (int a = 0; a < 8; a++) begin
      @(negedge clk);
      wr_en = 1; wa = 19'(a); wd = 32'hA000_0000 + 32'(a);
      rd_en = 1; ra = 19'(a + 8);
      @(posedge clk); #1;
    end
    @(negedge clk) wr_en = 0; rd_en = 0;
    for (int a = 0; a < 8; a++) begin
      check("bank0 written", b0.mem[a], 32'hA000_0000 + 32'(a));
      check("bank1 untouched", b1.mem[a], 32'h0B10_0000 + 32'(a));
    end
    // read bank 1 with latency 2
    @(negedge clk) rd_en = 1; ra = 19'(3);
    @(negedge clk) rd_en = 0;
    repeat (RD_LAT - 1) @(negedge clk); check("read from bank1", rd, 32'h0B10_0003);
    // read issued in the clock before the swap still returns bank 1
    @(negedge clk) rd_en = 1; ra = 19'(5);
    @(negedge clk) rd_en = 0; sel = 1;
    repeat (RD_LAT - 1) @(negedge clk); check("read across swap", rd, 32'h0B10_0005);
    // after the swap: reads from bank 0 (captured frame), writes to bank 1
    @(negedge clk) rd_en = 1; ra = 19'(2); wr_en = 1; wa = 19'(9); wd = 32'hC0DE_0009;
    @(negedge clk) rd_en = 0; wr_en = 0;
    repeat (RD_LAT - 1) @(negedge clk); check("read from bank0 after swap", rd, 32'hA000_0002);
    check("write to bank1 after swap", b1.mem[9], 32'hC0DE_0009);
    check("bank0 not written after swap", b0.mem[9], 32'h0B00_0009);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

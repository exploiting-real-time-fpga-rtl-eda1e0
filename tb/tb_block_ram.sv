// tb_block_ram: fills the default 2048-word memory with a pattern, reads
// every word back one clock after its address, then mixes random writes and
// reads against a reference array; checks read-before-write on one address.
// A second, 16-word instance is loaded at start-up from
// tb/block_ram_init.hex, whose word k is (k * 0x01010101) ^ 0xA5C30000, the
// way program code is placed in the memory with the configuration.
module tb_block_ram;
  logic clk = 0, we = 0;
  logic [10:0] addr = 0;
  logic [31:0] wd = 0, rd;
  logic [31:0] ref_mem [2048];
  int checks = 0, failures = 0;

  block_ram dut (.clk(clk), .addr(addr), .we(we), .wdata(wd), .rdata(rd));
  logic [3:0]  iaddr = 0;
  logic [31:0] ird;
  block_ram #(.DEPTH(16), .INIT_FILE("tb/block_ram_init.hex")) u_init (
    .clk(clk), .addr(iaddr), .we(1'b0), .wdata(32'h0), .rdata(ird));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 16; k++) begin
      @(negedge clk); iaddr = 4'(k);
      @(negedge clk); checks++;
      if (ird != ((32'(k) * 32'h0101_0101) ^ 32'hA5C3_0000)) begin
        failures++; $display("init word %0d: %h", k, ird);
      end
    end
    for (int a = 0; a < 2048; a++) begin
      @(negedge clk); we = 1; addr = 11'(a); wd = 32'(a) * 32'h9E37_79B9; ref_mem[a] = wd;
    end
    @(negedge clk) we = 0;
    for (int a = 0; a < 2048; a++) begin
      @(negedge clk); addr = 11'(a);
      @(negedge clk); checks++; if (rd != ref_mem[a]) failures++;
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      addr = 11'($urandom); we = $urandom_range(0, 1) == 1; wd = $urandom;
      @(posedge clk); #1;
      checks++; if (rd != ref_mem[addr]) begin failures++; if (failures < 5) $display("addr %0d", addr); end
      if (we) ref_mem[addr] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// zbt_sram_model: behavioural model of one external pipelined SRAM bank.
//
// Not synthesizable logic of this design: it stands for the off-board
// 2 Mbyte SRAM chip. A write stores wdata at addr on the clock edge; a read
// returns the addressed word LAT clocks later on rdata. Words never written
// read as zero.
module zbt_sram_model #(
  parameter int unsigned AW  = 19,
  parameter int unsigned LAT = 2
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  input  logic          we,
  input  logic          re,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata
);

  logic [31:0] mem [1 << AW];
  logic [31:0] pipe [LAT];

  initial begin
    for (int i = 0; i < (1 << AW); i++) mem[i] = '0;
    for (int i = 0; i < LAT; i++) pipe[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    pipe[0] <= re ? mem[addr] : 32'hDEAD_BEEF;
    for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
  end

  assign rdata = pipe[LAT-1];

endmodule

// block_ram: synchronous single-port 32-bit on-chip memory.
//
// Used for the Sabre program memory (8 KB, 2048 words: instructions and
// stack) and data memory (64 KB, 16384 words: constants). A write stores
// wdata at addr on the clock edge; a read returns the word at addr one clock
// later (read-before-write on the same address). Word addressed. When
// INIT_FILE names a hex file, the memory starts with its contents: this is how
// the processor's machine code is merged into the FPGA configuration, so that
// new software needs no hardware rebuild. Sizes and the initialisation follow
// the paper; the single port and the timing are this design's choices.
module block_ram #(
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned DATA_W = 32,
  parameter string       INIT_FILE = "",
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic [AW-1:0]     addr,
  input  logic              we,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  initial if (INIT_FILE != "") $readmemh(INIT_FILE, mem);

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    rdata <= mem[addr];
  end

endmodule

// frame_bank_mux: double-buffered frame store routing over two SRAM banks.
//
// The capture side (write port) and the display side (read port) always use
// different banks: the writer uses bank bank_sel, the reader the other one.
// When bank_sel changes, the frame just captured becomes the one displayed.
// Each bank port carries address, write enable and write data; read data
// comes back RDLAT clocks after the address, so the read-data select is
// bank_sel delayed by RDLAT clocks and reads issued before a swap still return
// from the bank they addressed. Unused bank ports hold their address and have
// write enable low.
//
// Two banks used for double buffering follow the paper; the routing and its
// timing are this design's.
module frame_bank_mux
  import boresight_pkg::*;
#(
  parameter int unsigned AW    = SRAM_AW,
  parameter int unsigned RDLAT = RD_LAT
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                bank_sel,
  // capture (write) port
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic [31:0]         wr_data,
  // display (read) port
  input  logic                rd_en,
  input  logic [AW-1:0]       rd_addr,
  output logic [31:0]         rd_data,
  // SRAM banks
  output logic [1:0][AW-1:0]  sram_addr,
  output logic [1:0]          sram_we,
  output logic [1:0]          sram_re,
  output logic [1:0][31:0]    sram_wdata,
  input  logic [1:0][31:0]    sram_rdata
);

  logic [RDLAT-1:0] sel_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_q <= '0;
    else        sel_q <= {sel_q[RDLAT-2:0], bank_sel};
  end

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      if (bank_sel == 1'(b)) begin
        sram_addr[b] = wr_addr;
        sram_we[b]   = wr_en;
        sram_re[b]   = 1'b0;
      end else begin
        sram_addr[b] = rd_addr;
        sram_we[b]   = 1'b0;
        sram_re[b]   = rd_en;
      end
      sram_wdata[b] = wr_data;
    end
  end

  // reader uses the bank the writer did not use, RDLAT clocks ago
  assign rd_data = sram_rdata[~sel_q[RDLAT-1]];

endmodule

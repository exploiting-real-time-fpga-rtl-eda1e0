// sincos_lut: registered sine and cosine of a 10-bit angle index.
//
// One table of 1024 signed 16-bit entries holds sin(2*pi*k/1024) in Q1.14
// (16384 = 1.0, clamped to 16383). Cosine is read from the same table a
// quarter turn ahead, cos(k) = sin(k + 256), so both values come from one
// 1024-element table as in the paper. The table is read from
// rtl/sine_1024.hex, whose entries are round(16384*sin(2*pi*k/1024)).
//
// Interface: theta in, sin_o/cos_o out one clock later (pipeline step 1 of
// the rotation pipeline). The 1024-entry size and 16-bit precision follow the
// paper; the Q1.14 format and the single-table cosine are this design's.
module sincos_lut #(
  parameter int unsigned ENTRIES   = 1024,
  parameter int unsigned TRIG_W    = 16,
  parameter int unsigned AW        = $clog2(ENTRIES)
) (
  input  logic                     clk,
  input  logic [AW-1:0]            theta,
  output logic signed [TRIG_W-1:0] sin_o,
  output logic signed [TRIG_W-1:0] cos_o
);

  logic [TRIG_W-1:0] table_q [ENTRIES];

  initial $readmemh("rtl/sine_1024.hex", table_q);

  logic [AW-1:0] cos_idx;
  assign cos_idx = theta + AW'(ENTRIES / 4);

  always_ff @(posedge clk) begin
    sin_o <= table_q[theta];
    cos_o <= table_q[cos_idx];
  end

endmodule

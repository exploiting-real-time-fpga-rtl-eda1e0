// affine_rotate: five-stage pipeline that rotates a pixel coordinate.
//
// Computes, for every clock on which in_valid is high,
//   OutX = (InX-Cx)*cos(theta) - (InY-Cy)*sin(theta) + Cx
//   OutY = (InY-Cy)*cos(theta) + (InX-Cx)*sin(theta) + Cy
// with (Cx,Cy) the centre of rotation. The five stages are those of the
// paper's routine: 1 sine/cosine lookup, 2 subtract the centre and convert to
// fixed point, 3 four fixed-point products, 4 sum and convert back to integer,
// 5 add the centre back. A new coordinate enters every clock; its result
// appears 5 clocks later with out_valid.
//
// Number formats (this design's choice; the paper says only "16-bit precision
// fixed point"): coordinates are signed COORD_W-bit integers, the
// intermediate values temp[0..5] are signed 16-bit Q12.4, sine/cosine are
// signed Q1.14. A product Q12.4 x Q1.14 is shifted right 14 back to Q12.4.
// fixed2Int rounds half up. theta, centre and the pixel's own values travel
// with the pixel through the pipeline.
module affine_rotate
  import boresight_pkg::*;
#(
  parameter int unsigned CW        = COORD_W,
  parameter int unsigned FIX_W     = 16,
  parameter int unsigned FIX_FRAC  = 4,
  parameter int unsigned TRIG_W    = 16,
  parameter int unsigned TRIG_FRAC = 14
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [ANGLE_W-1:0]   theta,
  input  logic signed [CW-1:0] centre_x,
  input  logic signed [CW-1:0] centre_y,
  input  logic signed [CW-1:0] in_x,
  input  logic signed [CW-1:0] in_y,
  output logic                 out_valid,
  output logic signed [CW-1:0] out_x,
  output logic signed [CW-1:0] out_y
);

  localparam int unsigned PW = FIX_W + TRIG_W;

  logic [5:1] v;

  // ---- step 1: sine / cosine lookup --------------------------------------
  logic signed [TRIG_W-1:0] sin1, cos1;
  logic signed [CW-1:0]     x1, y1, cx1, cy1;

  sincos_lut #(.ENTRIES(1 << ANGLE_W), .TRIG_W(TRIG_W)) u_lut (
    .clk(clk), .theta(theta), .sin_o(sin1), .cos_o(cos1));

  always_ff @(posedge clk) begin
    x1 <= in_x; y1 <= in_y; cx1 <= centre_x; cy1 <= centre_y;
  end

  // ---- step 2: map to centre, Int2fixed ----------------------------------
  logic signed [FIX_W-1:0]  t0, t1;
  logic signed [TRIG_W-1:0] sin2, cos2;
  logic signed [CW-1:0]     cx2, cy2;
  logic signed [CW:0]       map_x, map_y;

  assign map_x = (CW+1)'(x1) - (CW+1)'(cx1);
  assign map_y = (CW+1)'(y1) - (CW+1)'(cy1);

  always_ff @(posedge clk) begin
    t0   <= FIX_W'(map_x) <<< FIX_FRAC;
    t1   <= FIX_W'(map_y) <<< FIX_FRAC;
    sin2 <= sin1; cos2 <= cos1; cx2 <= cx1; cy2 <= cy1;
  end

  // ---- step 3: four fixed-point products ---------------------------------
  logic signed [PW-1:0]    p2, p3, p4, p5;
  logic signed [FIX_W-1:0] t2, t3, t4, t5;
  logic signed [CW-1:0]    cx3, cy3;

  always_comb begin
    p2 = PW'(t1) * PW'(-sin2);
    p3 = PW'(t0) * PW'(cos2);
    p4 = PW'(t0) * PW'(sin2);
    p5 = PW'(t1) * PW'(cos2);
  end

  always_ff @(posedge clk) begin
    t2 <= FIX_W'(p2 >>> TRIG_FRAC);
    t3 <= FIX_W'(p3 >>> TRIG_FRAC);
    t4 <= FIX_W'(p4 >>> TRIG_FRAC);
    t5 <= FIX_W'(p5 >>> TRIG_FRAC);
    cx3 <= cx2; cy3 <= cy2;
  end

  // ---- step 4: sum, fixed2Int (round half up) -----------------------------
  logic signed [FIX_W:0] sx, sy;
  logic signed [CW-1:0]  back_x, back_y, cx4, cy4;

  assign sx = (FIX_W+1)'(t2) + (FIX_W+1)'(t3) + (FIX_W+1)'(1 << (FIX_FRAC-1));
  assign sy = (FIX_W+1)'(t4) + (FIX_W+1)'(t5) + (FIX_W+1)'(1 << (FIX_FRAC-1));

  always_ff @(posedge clk) begin
    back_x <= CW'(sx >>> FIX_FRAC);
    back_y <= CW'(sy >>> FIX_FRAC);
    cx4 <= cx3; cy4 <= cy3;
  end

  // ---- step 5: add centre back -------------------------------------------
  always_ff @(posedge clk) begin
    out_x <= back_x + cx4;
    out_y <= back_y + cy4;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[4:1], in_valid};
  end
  assign out_valid = v[5];

endmodule

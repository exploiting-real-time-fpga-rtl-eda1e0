// video_out: produces one rotated and shifted output frame from the frame store.
//
// After a start pulse the block scans the display raster, one position per
// clock, x fastest. Each position (InX,InY) goes through the five-stage
// rotation pipeline (affine_rotate) about the frame centre, or about the
// centre given on centre_x/centre_y when either is non-zero; the linear
// correction (bx,by) is added to the result. If the resulting location lies
// in_frame the stored frame, its word is read from the frame store; otherwise
// the output pixel is black. Read data returns RD_LAT clocks after the
// address, and the pixel leaves on pix_data with pix_valid, pix_sof on the
// first one. The first output pixel is valid after the 5 + 1 + RD_LAT'th clock
// edge following the edge that samples start (10 with RD_LAT = 4); a frame
// then streams at one pixel per clock and done pulses with the last pixel.
//
// The rotation pipeline and the correction r' = Ar + B are the paper's. Using
// the transform as an inverse map (display position -> stored position) and
// filling outside positions with black are this design's choices.
module video_out
  import boresight_pkg::*;
#(
  parameter int unsigned HRES  = H_RES,
  parameter int unsigned VRES  = V_RES,
  parameter int unsigned AW    = SRAM_AW,
  parameter int unsigned RDLAT = RD_LAT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [ANGLE_W-1:0]        theta,
  input  logic signed [COORD_W-1:0] bx,
  input  logic signed [COORD_W-1:0] by,
  input  logic signed [COORD_W-1:0] centre_x,
  input  logic signed [COORD_W-1:0] centre_y,
  output logic                      rd_en,
  output logic [AW-1:0]             rd_addr,
  input  logic [31:0]               rd_data,
  output logic                      pix_valid,
  output logic                      pix_sof,
  output logic [23:0]               pix_data,
  output logic                      busy,
  output logic                      done,
  output logic                      outside    // this output pixel was outside the frame
);

  // ---- raster scan -------------------------------------------------------
  logic                      scanning;
  logic signed [COORD_W-1:0] sx, sy;
  logic                      scan_first, scan_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scanning <= 1'b0;
      sx <= '0;
      sy <= '0;
    end else if (!scanning) begin
      if (start) begin
        scanning <= 1'b1;
        sx <= '0;
        sy <= '0;
      end
    end else if (sx == COORD_W'(HRES - 1)) begin
      sx <= '0;
      if (sy == COORD_W'(VRES - 1)) scanning <= 1'b0;
      else                          sy <= sy + 1'b1;
    end else begin
      sx <= sx + 1'b1;
    end
  end

  assign scan_first = scanning && sx == '0 && sy == '0;
  assign scan_last  = scanning && sx == COORD_W'(HRES - 1) && sy == COORD_W'(VRES - 1);

  logic signed [COORD_W-1:0] cx, cy;
  assign cx = (centre_x != '0 || centre_y != '0) ? centre_x : COORD_W'(HRES / 2);
  assign cy = (centre_x != '0 || centre_y != '0) ? centre_y : COORD_W'(VRES / 2);

  // ---- rotation ----------------------------------------------------------
  logic                      rot_valid;
  logic signed [COORD_W-1:0] rot_x, rot_y;

  affine_rotate u_rot (
    .clk(clk), .rst_n(rst_n), .in_valid(scanning), .theta(theta),
    .centre_x(cx), .centre_y(cy), .in_x(sx), .in_y(sy),
    .out_valid(rot_valid), .out_x(rot_x), .out_y(rot_y));

  // first/last markers travel alongside the rotation pipeline
  logic [4:0] first_d, last_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_d <= '0;
      last_d  <= '0;
    end else begin
      first_d <= {first_d[3:0], scan_first};
      last_d  <= {last_d[3:0],  scan_last};
    end
  end

  // ---- correction and address --------------------------------------------
  logic signed [COORD_W:0] src_x, src_y;
  logic                    in_frame;
  assign src_x  = (COORD_W+1)'(rot_x) + (COORD_W+1)'(bx);
  assign src_y  = (COORD_W+1)'(rot_y) + (COORD_W+1)'(by);
  assign in_frame = src_x >= 0 && src_x < (COORD_W+1)'(HRES) &&
                  src_y >= 0 && src_y < (COORD_W+1)'(VRES);

  logic [RDLAT:0] v_q, in_q, first_q, last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_en   <= 1'b0;
      rd_addr <= '0;
    end else begin
      rd_en   <= rot_valid && in_frame;
      rd_addr <= AW'(unsigned'(src_y)) * AW'(HRES) + AW'(unsigned'(src_x));
    end
  end

  // ---- read return ---------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= '0; in_q <= '0; first_q <= '0; last_q <= '0;
    end else begin
      v_q     <= {v_q[RDLAT-1:0],     rot_valid};
      in_q    <= {in_q[RDLAT-1:0],    rot_valid && in_frame};
      first_q <= {first_q[RDLAT-1:0], first_d[4]};
      last_q  <= {last_q[RDLAT-1:0],  last_d[4]};
    end
  end

  assign pix_valid = v_q[RDLAT];
  assign pix_sof   = first_q[RDLAT];
  assign pix_data  = in_q[RDLAT] ? rd_data[23:0] : 24'h000000;
  assign outside   = v_q[RDLAT] && !in_q[RDLAT];
  assign done      = last_q[RDLAT];
  assign busy      = scanning || (|first_d) || (|last_d) || (|v_q[RDLAT-1:0]) || rot_valid;

endmodule

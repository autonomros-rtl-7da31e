// Perspective (bird's-eye) warp of the thresholded lane image.
//
// The warp moves every marked pixel (u = column, v = row) to its bird's-eye
// position with a fixed 3x3 homography H (signed Q16.16, row-major):
//   u' = (h0*u + h1*v + h2) / (h6*u + h7*v + h8)
//   v' = (h3*u + h4*v + h5) / (h6*u + h7*v + h8)
// rounded toward zero. A pixel whose class is not NONE and whose target lies
// inside the IMG_W x IMG_H image is passed on with out_ok high; all other
// pixels come out with out_ok low, so the frame-end flag always gets through.
//
// The paper warps the thresholded image with a fixed matrix before the lane
// decision and the regression. Those later steps only need the bird's-eye
// coordinates of the marked pixels, so this design maps each pixel forward
// instead of resampling a whole output image by inverse mapping; that needs
// no frame buffer. Holes the forward mapping leaves in a stretched region
// only change how the least-squares fit weights the rows. This is a
// departure from an image-library warp and is this design's choice.
//
// Timing: one pixel per cycle, result NW+2 cycles later, no back-pressure.
module warp_fwd
  import autonomros_pkg::*;
#(
  parameter int unsigned W = IMG_W,
  parameter int unsigned H = IMG_H
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic signed [31:0] hmat [9],
  input  logic               in_valid,
  input  class_pix_t         in_pix,
  output logic               out_valid,
  output logic               out_ok,
  output class_pix_t         out_pix
);
  localparam int unsigned NW = 46;
  localparam int unsigned TW = 2 + 1 + 1;   // class, last, ok

  logic signed [NW:0] nx, ny, dn;
  always_comb begin
    nx = (NW+1)'(hmat[0] * $signed({1'b0, in_pix.x})) + (NW+1)'(hmat[1] * $signed({1'b0, in_pix.y})) + (NW+1)'(hmat[2]);
    ny = (NW+1)'(hmat[3] * $signed({1'b0, in_pix.x})) + (NW+1)'(hmat[4] * $signed({1'b0, in_pix.y})) + (NW+1)'(hmat[5]);
    dn = (NW+1)'(hmat[6] * $signed({1'b0, in_pix.x})) + (NW+1)'(hmat[7] * $signed({1'b0, in_pix.y})) + (NW+1)'(hmat[8]);
  end

  // stage 1: numerators and denominator
  logic          s1_v;
  logic [NW-1:0] s1_nx, s1_ny, s1_dn;
  logic [TW-1:0] s1_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_v <= 1'b0;
    else        s1_v <= in_valid;
  end
  always_ff @(posedge clk) begin
    s1_nx  <= nx[NW-1:0];
    s1_ny  <= ny[NW-1:0];
    s1_dn  <= dn[NW-1:0];
    s1_tag <= {in_pix.cls, in_pix.last,
               (in_pix.cls != LANE_NONE) && (dn > 0) && (nx >= 0) && (ny >= 0)};
  end

  logic [NW-1:0] qx, qy;
  logic [TW-1:0] tag;
  logic          vx, vy, unused_t;
  div_pipe #(.NW(NW), .DW(NW), .TW(TW)) u_divx (
    .clk, .rst_n, .in_valid(s1_v), .num(s1_nx), .den(s1_dn), .tag_in(s1_tag),
    .out_valid(vx), .quo(qx), .tag_out(tag));
  div_pipe #(.NW(NW), .DW(NW), .TW(1)) u_divy (
    .clk, .rst_n, .in_valid(s1_v), .num(s1_ny), .den(s1_dn), .tag_in(1'b0),
    .out_valid(vy), .quo(qy), .tag_out(unused_t));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ok    <= 1'b0;
    end else begin
      out_valid <= vx;
      out_ok    <= vx && tag[0] && (qx < NW'(W)) && (qy < NW'(H));
    end
  end
  always_ff @(posedge clk) begin
    out_pix.x    <= qx[COL_W-1:0];
    out_pix.y    <= qy[ROW_W-1:0];
    out_pix.cls  <= lane_class_t'(tag[3:2]);
    out_pix.last <= tag[1];
  end

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) vx == vy);
endmodule

// Point Cloud Generation hardware node.
//
// Merges each depth pixel with its colour and turns the pixel (x, y, depth w)
// into a 3D point in the camera frame with the projection matrix P:
//   u = x*w, v = y*w
//   X = (u - cx*w - Tx) / fx,  Y = (v - cy*w - Ty) / fy,  Z = w
// These equations and the order of operations follow the paper. P is loaded
// once (cfg_valid) before the frames start, as the paper does with the
// camera's CameraInfo message; it stays until loaded again.
//
// Number formats (this design's choice): fx, fy, cx, cy, Tx, Ty are signed
// Q16.16 (Tx, Ty in pixel*mm); w is an unsigned 16-bit depth in mm; the
// outputs X, Y, Z are signed mm with COORD_FRAC fractional bits, X and Y
// rounded toward zero. fx and fy must be positive. Z is the 16-bit depth moved
// up by COORD_FRAC, so its low COORD_FRAC bits and its top 16 - COORD_FRAC bits
// are always zero: synthesis finds those outputs constant, by design.
//
// Timing: one pixel per cycle, no back-pressure; every pixel gives one point
// LATENCY cycles later, in order, with its colour and frame-end flag.
module pcg_core
  import autonomros_pkg::*;
#(
  parameter int unsigned FRAC = COORD_FRAC
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cfg_valid,
  input  cam_p_t     cfg,
  input  logic       in_valid,
  input  depth_pix_t in_pix,
  output logic       out_valid,
  output point_t     out_pt
);
  localparam int unsigned IW = 49;           // signed width of the numerators (Q16.16)
  localparam int unsigned NW = IW - 1 + FRAC; // divider width (magnitude << FRAC)
  localparam int unsigned TW = 1 + 32 + 24 + 1;
  localparam int unsigned LATENCY = NW + 2;

  cam_p_t p_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         p_q <= '0;
    else if (cfg_valid) p_q <= cfg;
  end

  // stage 1: u, v and the two numerators
  logic              s1_v;
  logic signed [IW-1:0] s1_nx, s1_ny;
  logic [15:0]       s1_w;
  logic [23:0]       s1_rgb;
  logic              s1_last;

  logic signed [IW-1:0] u_q16, v_q16, cxw, cyw;
  always_comb begin
    u_q16 = IW'($signed({1'b0, in_pix.x}) * $signed({1'b0, in_pix.w})) <<< MAT_FRAC;
    v_q16 = IW'($signed({1'b0, in_pix.y}) * $signed({1'b0, in_pix.w})) <<< MAT_FRAC;
    cxw   = IW'(p_q.cx * $signed({1'b0, in_pix.w}));
    cyw   = IW'(p_q.cy * $signed({1'b0, in_pix.w}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_v <= 1'b0;
    else        s1_v <= in_valid;
  end
  always_ff @(posedge clk) begin
    s1_nx   <= u_q16 - cxw - IW'(p_q.tx);
    s1_ny   <= v_q16 - cyw - IW'(p_q.ty);
    s1_w    <= in_pix.w;
    s1_rgb  <= in_pix.rgb;
    s1_last <= in_pix.last;
  end

  // stage 2..: magnitude division, sign restored afterwards
  logic [NW-1:0] magx, magy, qx, qy;
  logic [TW-1:0] tagx_in, tagx_out;
  logic          tagy_out, vx, vy;
  always_comb begin
    magx    = NW'(s1_nx[IW-1] ? -s1_nx : s1_nx) << FRAC;
    magy    = NW'(s1_ny[IW-1] ? -s1_ny : s1_ny) << FRAC;
    tagx_in = {s1_nx[IW-1], 32'(s1_w) << FRAC, s1_rgb, s1_last};
  end

  div_pipe #(.NW(NW), .DW(31), .TW(TW)) u_divx (
    .clk, .rst_n, .in_valid(s1_v), .num(magx), .den(p_q.fx[30:0]), .tag_in(tagx_in),
    .out_valid(vx), .quo(qx), .tag_out(tagx_out));
  div_pipe #(.NW(NW), .DW(31), .TW(1)) u_divy (
    .clk, .rst_n, .in_valid(s1_v), .num(magy), .den(p_q.fy[30:0]), .tag_in(s1_ny[IW-1]),
    .out_valid(vy), .quo(qy), .tag_out(tagy_out));

  logic signed [31:0] x_res, y_res;
  always_comb begin
    x_res = tagx_out[TW-1] ? -$signed(qx[31:0]) : $signed(qx[31:0]);
    y_res = tagy_out       ? -$signed(qy[31:0]) : $signed(qy[31:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vx;
  end
  always_ff @(posedge clk) begin
    out_pt.x_mm   <= x_res;
    out_pt.y_mm   <= y_res;
    out_pt.z_mm   <= $signed(tagx_out[TW-2 -: 32]);
    out_pt.rgb  <= tagx_out[24:1];
    out_pt.last <= tagx_out[0];
  end

  // the two dividers run in lock step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) vx == vy);
endmodule

// Lane Detection hardware node.
//
// Streams a colour camera frame through the steps the paper lists and, once
// per frame, produces the lane polynomial and the car's trajectory:
//   rgb2hsv          RGB -> HSV
//   color_threshold  white and yellow ranges tested in parallel -> class image
//   warp_fwd         bird's-eye warp with a fixed homography
//   lsq_moments x2   normal-equation sums of the white and of the yellow
//                    pixels (x = bird's-eye row, y = bird's-eye column)
//   decision         at frame end, follow the colour with more pixels
//                    (white on a tie)
//   lsq_solver       second-order fit f_l(x) = a2 x^2 + a1 x + a0
//   lane_traj        30 points of f_l, shifted and moved to the car frame,
//                    third-order fit f_t(x) = a3 x^3 + ... + a0
// Keeping both colours' sums while the frame streams lets the decision be
// taken after the warp, as in the paper, without storing the image.
// Coefficients are signed Q32.32 in normalised units (512 pixels = 1.0; see
// lsq_solver and lane_traj).
//
// Timing: one pixel per cycle, no back-pressure. The result (res_valid
// pulse) follows a frame's last pixel after the pipeline delay (about 70
// cycles) plus the two solves (about 1.6k cycles). A frame that ends while
// the previous one is still being solved is not fitted; frames_skipped
// counts those. res_err flags a frame whose fit failed (no or too few lane
// pixels, or a trajectory point out of range).
module lane_detect
  import autonomros_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic signed [31:0] hmat [9],
  input  hsv_range_t         white_rng,
  input  hsv_range_t         yellow_rng,
  input  logic signed [63:0] shift,
  input  logic signed [63:0] scale,
  input  logic               in_valid,
  input  rgb_pix_t           in_pix,
  output logic               res_valid,
  output logic               res_err,
  output lane_class_t        res_cls,
  output logic [31:0]        n_white,
  output logic [31:0]        n_yellow,
  output logic signed [63:0] lane_coef [3],
  output logic signed [63:0] traj_coef [4],
  output logic [31:0]        frames_skipped
);
  localparam int unsigned TW = COL_W + ROW_W + 1;

  // ---- HSV
  logic          h_v;
  hsv_t          h_hsv;
  logic [TW-1:0] h_tag;
  rgb2hsv #(.TW(TW)) u_hsv (
    .clk, .rst_n, .in_valid, .in_rgb(in_pix.rgb), .in_tag({in_pix.x, in_pix.y, in_pix.last}),
    .out_valid(h_v), .out_hsv(h_hsv), .out_tag(h_tag));

  // ---- thresholds
  logic          t_v;
  lane_class_t   t_cls;
  logic [TW-1:0] t_tag;
  color_threshold #(.TW(TW)) u_thr (
    .clk, .rst_n, .white_rng, .yellow_rng, .in_valid(h_v), .in_hsv(h_hsv), .in_tag(h_tag),
    .out_valid(t_v), .out_cls(t_cls), .out_tag(t_tag));

  // ---- warp
  class_pix_t    c_pix, w_pix;
  logic          w_v, w_ok;
  always_comb begin
    c_pix.x    = t_tag[TW-1 -: COL_W];
    c_pix.y    = t_tag[ROW_W:1];
    c_pix.cls  = t_cls;
    c_pix.last = t_tag[0];
  end
  warp_fwd u_warp (
    .clk, .rst_n, .hmat, .in_valid(t_v), .in_pix(c_pix), .out_valid(w_v), .out_ok(w_ok), .out_pix(w_pix));

  // ---- sums for both colours
  logic               mw_done, my_done;
  logic signed [63:0] sx_w [5], sxy_w [3], sx_y [5], sxy_y [3];
  logic signed [10:0] m_x, m_y;
  assign m_x = 11'(w_pix.y);
  assign m_y = 11'(w_pix.x);
  lsq_moments #(.K(2), .XW(11), .YW(11), .AW(64)) u_mw (
    .clk, .rst_n, .in_valid(w_v), .in_use(w_ok && w_pix.cls == LANE_WHITE), .in_last(w_pix.last),
    .in_x(m_x), .in_y(m_y), .done(mw_done), .sx(sx_w), .sxy(sxy_w));
  lsq_moments #(.K(2), .XW(11), .YW(11), .AW(64)) u_my (
    .clk, .rst_n, .in_valid(w_v), .in_use(w_ok && w_pix.cls == LANE_YELLOW), .in_last(w_pix.last),
    .in_x(m_x), .in_y(m_y), .done(my_done), .sx(sx_y), .sxy(sxy_y));

  // ---- decision and the two fits
  typedef enum logic [1:0] {L_IDLE, L_FIT, L_TRAJ} st_t;
  st_t st;
  logic               pick_y;
  logic signed [63:0] sx_sel [5], sxy_sel [3];
  logic               f_start, f_busy, f_done, f_err;
  logic signed [63:0] f_coef [3];
  logic               t_start, t_busy, t_done, t_err;

  assign pick_y = sx_y[0] > sx_w[0];
  always_comb begin
    sx_sel  = pick_y ? sx_y  : sx_w;
    sxy_sel = pick_y ? sxy_y : sxy_w;
  end
  assign f_start = mw_done && (st == L_IDLE);

  lsq_solver #(.K(2), .AW(64), .XSH(9), .YSH(9), .F(32), .DW(64)) u_fit (
    .clk, .rst_n, .start(f_start), .sx(sx_sel), .sxy(sxy_sel),
    .busy(f_busy), .done(f_done), .err(f_err), .coef(f_coef));

  assign t_start = (st == L_FIT) && f_done && !f_err;
  lane_traj u_traj (
    .clk, .rst_n, .start(t_start), .lane_coef(f_coef), .shift, .scale,
    .busy(t_busy), .done(t_done), .err(t_err), .traj_coef);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; res_valid <= 1'b0; res_err <= 1'b0; res_cls <= LANE_NONE;
      n_white <= '0; n_yellow <= '0; frames_skipped <= '0;
      for (int k = 0; k < 3; k++) lane_coef[k] <= '0;
    end else begin
      res_valid <= 1'b0;
      if (mw_done && st != L_IDLE) frames_skipped <= frames_skipped + 1'b1;
      case (st)
        L_IDLE: if (mw_done) begin
          res_cls  <= pick_y ? LANE_YELLOW : LANE_WHITE;
          n_white  <= 32'(sx_w[0]);
          n_yellow <= 32'(sx_y[0]);
          st       <= L_FIT;
        end
        L_FIT: if (f_done) begin
          lane_coef <= f_coef;
          if (f_err) begin
            res_valid <= 1'b1; res_err <= 1'b1; st <= L_IDLE;
          end else st <= L_TRAJ;
        end
        L_TRAJ: if (t_done) begin
          res_valid <= 1'b1; res_err <= t_err; st <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  // both colour accumulators close a frame together
  a_sets_aligned: assert property (@(posedge clk) disable iff (!rst_n) mw_done == my_done);

  logic unused;
  assign unused = f_busy ^ t_busy;
endmodule

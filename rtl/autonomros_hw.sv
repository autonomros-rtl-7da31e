// Hardware part of the AutonomROS driving unit: the three accelerated nodes.
//
// Point Cloud Generation turns the camera's depth+colour stream into a point
// cloud; its points are published (pc_*) and also fed straight into Obstacle
// Detection, which publishes a 234-byte obstacle grid per frame for the
// navigation software. Lane Detection works on the colour camera stream and
// publishes, per frame, the lane colour it follows, the lane polynomial and
// the trajectory polynomial. This is the hardware half of the unit's block
// diagram: navigation, localization, cruise control and vehicle
// communication are software nodes and connect through these ports.
//
// In the original system every node sits in its own reconfigurable slot and
// reaches its messages through an OS interface and a memory interface; those
// interfaces come from the underlying framework and are not designed here.
// In their place this top has plain streams: one pixel or point per cycle
// with a valid flag and a frame-end flag, and the configuration (camera
// matrix, fixed transforms, colour ranges) as inputs.
//
// Timing: both camera streams take one pixel per cycle without back-pressure.
// A depth frame must have at least 237 pixels (234 grid cells + 3) so that a
// grid readout ends before the next frame does; a shorter one loses its last
// point, which points_dropped counts.
module autonomros_hw
  import autonomros_pkg::*;
#(
  parameter int unsigned GX         = 18,
  parameter int unsigned GY         = 13,
  parameter int unsigned CELL_SHIFT = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  // Point Cloud Generation
  input  logic               cam_cfg_valid,
  input  cam_p_t             cam_cfg,
  input  logic               depth_valid,
  input  depth_pix_t         depth_pix,
  output logic               pc_valid,
  output point_t             pc_pt,
  // Obstacle Detection
  input  logic signed [31:0] tmat [12],
  output logic               grid_valid,
  output logic [$clog2(GX*GY)-1:0] grid_idx,
  output logic [7:0]         grid_data,
  output logic               grid_last,
  output logic [31:0]        box_count,
  output logic [31:0]        points_dropped,
  // Lane Detection
  input  logic signed [31:0] hmat [9],
  input  hsv_range_t         white_rng,
  input  hsv_range_t         yellow_rng,
  input  logic signed [63:0] lane_shift,
  input  logic signed [63:0] lane_scale,
  input  logic               rgb_valid,
  input  rgb_pix_t           rgb_pix,
  output logic               lane_valid,
  output logic               lane_err,
  output lane_class_t        lane_cls,
  output logic [31:0]        lane_n_white,
  output logic [31:0]        lane_n_yellow,
  output logic signed [63:0] lane_coef [3],
  output logic signed [63:0] traj_coef [4],
  output logic [31:0]        lane_frames_skipped
);
  logic od_ready;

  pcg_core u_pcg (
    .clk, .rst_n, .cfg_valid(cam_cfg_valid), .cfg(cam_cfg),
    .in_valid(depth_valid), .in_pix(depth_pix), .out_valid(pc_valid), .out_pt(pc_pt));

  obstacle_grid #(.GX(GX), .GY(GY), .CELL_SHIFT(CELL_SHIFT)) u_od (
    .clk, .rst_n, .tmat, .in_valid(pc_valid), .in_ready(od_ready), .in_pt(pc_pt),
    .grid_valid, .grid_idx, .grid_data, .grid_last, .box_count);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       points_dropped <= '0;
    else if (pc_valid && !od_ready)   points_dropped <= points_dropped + 1'b1;
  end

  lane_detect u_lane (
    .clk, .rst_n, .hmat, .white_rng, .yellow_rng, .shift(lane_shift), .scale(lane_scale),
    .in_valid(rgb_valid), .in_pix(rgb_pix),
    .res_valid(lane_valid), .res_err(lane_err), .res_cls(lane_cls),
    .n_white(lane_n_white), .n_yellow(lane_n_yellow),
    .lane_coef, .traj_coef, .frames_skipped(lane_frames_skipped));
endmodule

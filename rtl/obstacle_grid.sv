// Obstacle Detection hardware node: point cloud -> obstacle grid.
//
// Each point of the cloud goes through the four steps the paper lists:
//  1. transform from the camera frame into the car base frame with a fixed
//     3x4 matrix [R | t]:  p_car = R * p_cam + t;
//  2. keep it only if it lies inside the "obstacle box" in front of the car
//     (X0_MM <= x < X0_MM + GX*cell, |y| < GY*cell/2, Z_MIN_MM <= z <= Z_MAX_MM);
//  3. project it to the ground plane (drop z);
//  4. count it in its grid cell. A cell holds a saturating 8-bit count.
// At the end of a frame (the point flagged last) the grid is published as
// GX*GY bytes, cell index = ix*GY + iy (ix forward, iy from the right edge).
// With the defaults 18 x 13 = 234 cells, the 234-byte grid the paper quotes.
// The split 18 x 13, the 64 mm cell, the box limits and the number formats
// are this design's choices; the paper gives only the grid size in bytes.
//
// Two grid banks alternate: one counts the current frame while the other is
// read out and cleared, so frames may follow each other back to back.
// Formats: R entries signed Q16.16; t and point coordinates signed mm with
// FRAC fractional bits.
//
// Timing: one point per cycle while in_ready is high. in_ready is low only
// for a frame's last point while the previous grid is still being read out
// (frames of fewer than GX*GY+3 points). A point is counted 3 cycles after it
// is accepted; grid readout starts the cycle after the last point is counted
// and gives one cell per cycle (grid_last on the final cell).
module obstacle_grid
  import autonomros_pkg::*;
#(
  parameter int unsigned GX         = 18,   // cells along the driving direction
  parameter int unsigned GY         = 13,   // cells across
  parameter int unsigned CELL_SHIFT = 6,    // cell edge = 2**CELL_SHIFT mm
  parameter int          X0_MM      = 100,  // box start in front of the car base
  parameter int          Z_MIN_MM   = 20,   // ignore the floor
  parameter int          Z_MAX_MM   = 300,  // ignore what is higher than the car
  parameter int unsigned FRAC       = COORD_FRAC
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic signed [31:0] tmat [12],      // row-major 3x4 [R | t]
  input  logic               in_valid,
  output logic               in_ready,
  input  point_t             in_pt,
  output logic               grid_valid,
  output logic [$clog2(GX*GY)-1:0] grid_idx,
  output logic [7:0]         grid_data,
  output logic               grid_last,
  output logic [31:0]        box_count      // points in the box of the frame just published
);
  localparam int unsigned NCELL = GX * GY;
  localparam int unsigned IDXW  = $clog2(NCELL);
  localparam int unsigned SH    = CELL_SHIFT + FRAC;
  localparam longint      XLEN  = longint'(GX) << SH;
  localparam longint      YLEN  = longint'(GY) << SH;

  // ---------------- stage 1: transform into the car frame
  logic s1_v, s1_last;
  logic signed [47:0] s1_x, s1_y, s1_z;
  logic signed [47:0] tr [3];
  always_comb begin
    for (int r = 0; r < 3; r++) begin
      tr[r] = 48'(((64'(tmat[4*r]) * 64'(in_pt.x_mm)) + (64'(tmat[4*r+1]) * 64'(in_pt.y_mm))
                 + (64'(tmat[4*r+2]) * 64'(in_pt.z_mm))) >>> MAT_FRAC) + 48'(tmat[4*r+3]);
    end
  end

  logic accept;
  assign accept = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin s1_v <= 1'b0; s1_last <= 1'b0; end
    else begin s1_v <= accept; s1_last <= accept && in_pt.last; end
  end
  always_ff @(posedge clk) begin
    s1_x <= tr[0]; s1_y <= tr[1]; s1_z <= tr[2];
  end

  // ---------------- stage 2: obstacle box, projection, cell index
  logic s2_v, s2_in, s2_last;
  logic [IDXW-1:0] s2_idx;
  logic signed [47:0] xrel, yrel;
  logic in_box;
  logic [IDXW-1:0] idx_c;
  always_comb begin
    xrel   = s1_x - (48'(X0_MM) <<< FRAC);
    yrel   = s1_y + 48'(YLEN / 2);
    in_box = (xrel >= 0) && (xrel < 48'(XLEN)) && (yrel >= 0) && (yrel < 48'(YLEN))
          && (s1_z >= (48'(Z_MIN_MM) <<< FRAC)) && (s1_z <= (48'(Z_MAX_MM) <<< FRAC));
    idx_c  = IDXW'((xrel >>> SH) * GY + (yrel >>> SH));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin s2_v <= 1'b0; s2_in <= 1'b0; s2_last <= 1'b0; end
    else begin s2_v <= s1_v; s2_in <= s1_v && in_box; s2_last <= s1_last; end
  end
  always_ff @(posedge clk) s2_idx <= idx_c;

  // ---------------- stage 3: count; banks; readout
  logic [7:0]  grid [2][NCELL];
  logic        wr_bank;
  logic        rd_busy;
  logic [IDXW-1:0] rd_idx;
  logic [31:0] cnt_cur;

  assign in_ready = !(in_pt.last && (rd_busy || s1_last || s2_last));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++)
        for (int c = 0; c < NCELL; c++) grid[b][c] <= '0;
      wr_bank <= 1'b0; rd_busy <= 1'b0; rd_idx <= '0; cnt_cur <= '0; box_count <= '0;
      grid_valid <= 1'b0; grid_idx <= '0; grid_data <= '0; grid_last <= 1'b0;
    end else begin
      grid_valid <= 1'b0;
      grid_last  <= 1'b0;
      if (s2_in && grid[wr_bank][s2_idx] != 8'hFF)
        grid[wr_bank][s2_idx] <= grid[wr_bank][s2_idx] + 8'd1;
      if (s2_v && s2_last) begin
        wr_bank   <= ~wr_bank;
        rd_busy   <= 1'b1;
        rd_idx    <= '0;
        box_count <= cnt_cur + 32'(s2_in);
        cnt_cur   <= '0;
      end else if (s2_in) begin
        cnt_cur <= cnt_cur + 32'd1;
      end
      if (rd_busy) begin
        grid_valid <= 1'b1;
        grid_idx   <= rd_idx;
        grid_data  <= grid[~wr_bank][rd_idx];
        grid_last  <= (rd_idx == IDXW'(NCELL - 1));
        grid[~wr_bank][rd_idx] <= '0;
        rd_idx     <= rd_idx + 1'b1;
        if (rd_idx == IDXW'(NCELL - 1)) rd_busy <= 1'b0;
      end
    end
  end

  // a bank is never handed to the readout while the other is still being read
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) (s2_v && s2_last) |-> !rd_busy);
endmodule

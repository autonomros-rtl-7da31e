// Shared types and constants of the AutonomROS hardware nodes.
//
// The image size (640x480) is the depth and colour resolution the design is
// evaluated at. Coordinates of 3D points are signed fixed point millimetres
// with COORD_FRAC fractional bits; camera and transform matrices use signed
// Q16.16 coefficients. These number formats are this design's own choice:
// the paper states the arithmetic (projection matrix, transform matrices,
// least-squares system) but not its number formats.
package autonomros_pkg;

  localparam int unsigned IMG_W      = 640;
  localparam int unsigned IMG_H      = 480;
  localparam int unsigned COL_W      = 10;   // bits of a column index
  localparam int unsigned ROW_W      = 9;    // bits of a row index
  localparam int unsigned COORD_FRAC = 8;    // fractional bits of point coordinates (mm)
  localparam int unsigned MAT_FRAC   = 16;   // fractional bits of matrix coefficients

  // Camera projection matrix P (Eq. 1): only the six non-trivial entries.
  typedef struct packed {
    logic signed [31:0] fx;
    logic signed [31:0] fy;
    logic signed [31:0] cx;
    logic signed [31:0] cy;
    logic signed [31:0] tx;
    logic signed [31:0] ty;
  } cam_p_t;

  // One pixel of the aligned depth + colour image.
  typedef struct packed {
    logic [COL_W-1:0] x;      // column
    logic [ROW_W-1:0] y;      // row
    logic [15:0]      w;      // depth in mm
    logic [23:0]      rgb;    // {r,g,b}
    logic             last;   // last pixel of the frame
  } depth_pix_t;

  // One point of the point cloud (camera or car frame).
  typedef struct packed {
    logic signed [31:0] x_mm;
    logic signed [31:0] y_mm;
    logic signed [31:0] z_mm;
    logic [23:0]        rgb;
    logic               last;
  } point_t;

  // One pixel of the colour camera image.
  typedef struct packed {
    logic [COL_W-1:0] x;
    logic [ROW_W-1:0] y;
    logic [23:0]      rgb;
    logic             last;
  } rgb_pix_t;

  typedef struct packed {
    logic [7:0] h;   // hue 0..179 (degrees / 2)
    logic [7:0] s;
    logic [7:0] v;
  } hsv_t;

  // Result of colour thresholding.
  typedef enum logic [1:0] {
    LANE_NONE   = 2'd0,
    LANE_WHITE  = 2'd1,
    LANE_YELLOW = 2'd2
  } lane_class_t;

  // Pixel coordinates with a class, before and after the warp.
  typedef struct packed {
    logic [COL_W-1:0] x;
    logic [ROW_W-1:0] y;
    lane_class_t      cls;
    logic             last;
  } class_pix_t;

  // Inclusive HSV range used by the thresholding.
  typedef struct packed {
    hsv_t lo;
    hsv_t hi;
  } hsv_range_t;

endpackage

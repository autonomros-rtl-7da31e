// Trajectory stage of lane detection.
//
// Takes the lane polynomial f_l (order 2, fitted in the bird's-eye image)
// and derives the cubic trajectory f_t that the car follows, as the paper
// describes: f_l is evaluated at NPTS = 30 rows spread evenly over the image
// height, x_i = i * 480/30 (i = 0..29); each value is shifted toward the
// middle of the lane and the points are moved into the car base frame; a
// third-order least-squares fit through these 30 points gives f_t.
//
// Coordinates: image values are normalised by 2^XSH (512 pixels = 1.0).
// lane_coef holds f_l in those units (y/512 = sum a_j (x/512)^j). The lateral
// shift `shift` is added to f_l(x_i) (same units). The car frame has its origin
// at the bottom centre of the bird's-eye image, x forward and y to the left:
//   x_car = scale * (H - x_i) / 512,   y_car = scale * (W/2 - y_i) / 512,
// so traj_coef describes y_car = sum a_j x_car^j with scale converting
// normalised image units to car units. All values are signed fixed point with
// F fractional bits. The paper gives the 30 points, the shift and the car
// transform only in words; this form of shift and transform (no rotation),
// and the use of shift and scale as inputs, are this design's choices.
// err is set if a point does not fit the 16-bit (x) or 20-bit (y) range the
// cubic fit takes (12 fractional bits), or if the fit is singular.
//
// Timing: start while busy is low; the 30 points take 30 cycles, the cubic
// solve about 10 divisions of DW+F+1 cycles; done pulses once at the end.
module lane_traj #(
  parameter int unsigned NPTS = 30,
  parameter int unsigned STEP = 16,    // 480 / 30
  parameter int unsigned W    = 640,
  parameter int unsigned H    = 480,
  parameter int unsigned XSH  = 9,
  parameter int unsigned F    = 32,
  parameter int unsigned DW   = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [DW-1:0] lane_coef [3],
  input  logic signed [DW-1:0] shift,
  input  logic signed [DW-1:0] scale,
  output logic                 busy,
  output logic                 done,
  output logic                 err,
  output logic signed [DW-1:0] traj_coef [4]
);
  localparam int unsigned OXSH = 12;   // fractional bits of the points fed to the cubic fit
  localparam int unsigned XW   = 16;
  localparam int unsigned YW   = 20;
  localparam int unsigned AW   = 6 * (XW - 1) + 8;
  localparam int unsigned IW   = $clog2(NPTS + 1);

  function automatic logic signed [DW-1:0] fmul(logic signed [DW-1:0] a, logic signed [DW-1:0] b);
    logic signed [2*DW-1:0] p;
    p = (2*DW)'(a) * (2*DW)'(b);
    return DW'(p >>> F);
  endfunction

  typedef enum logic [1:0] {T_IDLE, T_GEN, T_FIT, T_WAIT} st_t;
  st_t st;
  logic [IW-1:0] i;
  logic signed [DW-1:0] a_q [3];
  logic signed [DW-1:0] sh_q, sc_q;
  logic range_err;

  // evaluate one point
  logic signed [DW-1:0] xn, yv, xc, yc, xc_i, yc_i;
  logic                 fits;
  always_comb begin
    xn   = DW'(i * STEP) <<< (F - XSH);
    yv   = fmul(fmul(a_q[2], xn) + a_q[1], xn) + a_q[0] + sh_q;
    xc   = fmul(sc_q, (DW'(H) <<< (F - XSH)) - xn);
    yc   = fmul(sc_q, (DW'(W / 2) <<< (F - XSH)) - yv);
    xc_i = xc >>> (F - OXSH);
    yc_i = yc >>> (F - OXSH);
    fits = (xc_i >= -(DW'(1) <<< (XW - 1))) && (xc_i < (DW'(1) <<< (XW - 1)))
        && (yc_i >= -(DW'(1) <<< (YW - 1))) && (yc_i < (DW'(1) <<< (YW - 1)));
  end

  logic                 m_valid, m_last, m_done;
  logic signed [XW-1:0] m_x;
  logic signed [YW-1:0] m_y;
  logic signed [AW-1:0] sx [7], sxy [4];
  logic                 s_start, s_busy, s_done, s_err;

  lsq_moments #(.K(3), .XW(XW), .YW(YW), .AW(AW)) u_mom (
    .clk, .rst_n, .in_valid(m_valid), .in_use(1'b1), .in_last(m_last), .in_x(m_x), .in_y(m_y),
    .done(m_done), .sx, .sxy);
  lsq_solver #(.K(3), .AW(AW), .XSH(OXSH), .YSH(OXSH), .F(F), .DW(DW)) u_fit (
    .clk, .rst_n, .start(s_start), .sx, .sxy, .busy(s_busy), .done(s_done), .err(s_err), .coef(traj_coef));

  assign m_valid = (st == T_GEN);
  assign m_last  = (st == T_GEN) && (i == IW'(NPTS - 1));
  assign m_x     = XW'(xc_i);
  assign m_y     = YW'(yc_i);
  assign s_start = m_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; i <= '0; busy <= 1'b0; done <= 1'b0; err <= 1'b0; range_err <= 1'b0;
      sh_q <= '0; sc_q <= '0;
      for (int k = 0; k < 3; k++) a_q[k] <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        T_IDLE: if (start) begin
          a_q <= lane_coef; sh_q <= shift; sc_q <= scale;
          i <= '0; busy <= 1'b1; range_err <= 1'b0;
          st <= T_GEN;
        end
        T_GEN: begin
          if (!fits) range_err <= 1'b1;
          if (i == IW'(NPTS - 1)) st <= T_FIT;
          else i <= i + 1'b1;
        end
        T_FIT: if (m_done) st <= T_WAIT;
        T_WAIT: if (s_done) begin
          err  <= s_err || range_err;
          done <= 1'b1;
          busy <= 1'b0;
          st   <= T_IDLE;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = s_busy;
endmodule

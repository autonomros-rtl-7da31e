// Accumulator for the least-squares normal equations of a polynomial fit.
//
// For a stream of points (x_n, y_n) it forms the sums that make up the
// system the paper solves for a polynomial of order K:
//   sx[k]  = sum_n x_n^k        k = 0 .. 2K   (sx[0] is the point count N)
//   sxy[k] = sum_n y_n * x_n^k  k = 0 .. K
// The sums are exact integers. A point with in_use low is not counted; a
// point with in_last high ends the set: one cycle after it has been added
// the totals appear on sx/sxy with done high for one cycle, and the
// accumulators restart from zero with the next point, so sets may follow
// each other back to back. sx/sxy hold until the next done.
// The paper gives the system; computing its sums on the fly while the
// pixels stream past is this design's way of doing it without storing them.
//
// Timing: one point per cycle; done follows the last point after 2 cycles.
module lsq_moments #(
  parameter int unsigned K  = 2,    // polynomial order
  parameter int unsigned XW = 11,   // signed width of x
  parameter int unsigned YW = 11,   // signed width of y
  parameter int unsigned AW = 64    // signed width of the sums
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_use,
  input  logic                 in_last,
  input  logic signed [XW-1:0] in_x,
  input  logic signed [YW-1:0] in_y,
  output logic                 done,
  output logic signed [AW-1:0] sx  [2*K+1],
  output logic signed [AW-1:0] sxy [K+1]
);
  // stage 1: register the point
  logic                 s1_use, s1_last;
  logic signed [XW-1:0] s1_x;
  logic signed [YW-1:0] s1_y;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_use <= 1'b0; s1_last <= 1'b0; s1_x <= '0; s1_y <= '0;
    end else begin
      s1_use  <= in_valid && in_use;
      s1_last <= in_valid && in_last;
      s1_x    <= in_x;
      s1_y    <= in_y;
    end
  end

  // stage 2: powers of x and the products with y, then accumulate
  logic signed [AW-1:0] pw  [2*K+1];
  logic signed [AW-1:0] ypw [K+1];
  always_comb begin
    pw[0] = AW'(1);
    for (int k = 1; k <= 2 * K; k++) pw[k] = pw[k-1] * AW'(s1_x);
    for (int k = 0; k <= K; k++) ypw[k] = pw[k] * AW'(s1_y);
  end

  logic signed [AW-1:0] acc  [2*K+1];
  logic signed [AW-1:0] accy [K+1];
  logic signed [AW-1:0] nxt  [2*K+1];
  logic signed [AW-1:0] nxty [K+1];
  always_comb begin
    for (int k = 0; k <= 2 * K; k++) nxt[k]  = acc[k]  + (s1_use ? pw[k]  : '0);
    for (int k = 0; k <= K; k++)     nxty[k] = accy[k] + (s1_use ? ypw[k] : '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
      for (int k = 0; k <= 2 * K; k++) begin acc[k] <= '0; sx[k] <= '0; end
      for (int k = 0; k <= K; k++)     begin accy[k] <= '0; sxy[k] <= '0; end
    end else begin
      done <= s1_last;
      for (int k = 0; k <= 2 * K; k++) acc[k]  <= s1_last ? '0 : nxt[k];
      for (int k = 0; k <= K; k++)     accy[k] <= s1_last ? '0 : nxty[k];
      if (s1_last) begin
        sx  <= nxt;
        sxy <= nxty;
      end
    end
  end
endmodule

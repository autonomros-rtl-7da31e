// Self-checking testbench for lane_detect. It draws camera frames with a
// yellow and a white lane marking on a dark road (every 2nd row, every 4th
// column, which is enough for the fit), streams them through the block and
// checks against a model computed here: pixel classes, the bird's-eye warp,
// the white/yellow pixel counts, the colour decision, the quadratic lane fit
// and the cubic trajectory fit (both solved in double precision here).
// Frames: one with a mostly yellow lane, one with a mostly white lane, a tiny
// frame sent while the previous is still being solved (must be skipped), and
// a frame without lane pixels (must report an error).
module tb_lane_detect;
  import autonomros_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [31:0] hmat [9];
  hsv_range_t white_rng, yellow_rng;
  logic signed [63:0] shift, scale;
  logic in_valid = 0; rgb_pix_t in_pix;
  logic res_valid, res_err; lane_class_t res_cls;
  logic [31:0] n_white, n_yellow, frames_skipped;
  logic signed [63:0] lane_coef [3], traj_coef [4];

  lane_detect dut (.clk, .rst_n, .hmat, .white_rng, .yellow_rng, .shift, .scale, .in_valid, .in_pix,
                   .res_valid, .res_err, .res_cls, .n_white, .n_yellow, .lane_coef, .traj_coef, .frames_skipped);

  function automatic real q32(logic signed [63:0] v); return real'(v) / 4294967296.0; endfunction

  function automatic void fit(int kk, real xs[$], real ys[$], output real a[4]);
    real m [4][5];
    real f, s;
    int n;
    n = kk + 1;
    for (int r = 0; r < n; r++) for (int c = 0; c <= n; c++) m[r][c] = 0.0;
    foreach (xs[i]) for (int r = 0; r < n; r++) begin
      for (int c = 0; c < n; c++) m[r][c] += xs[i] ** (r + c);
      m[r][n] += ys[i] * xs[i] ** r;
    end
    for (int p = 0; p < n; p++) for (int r = p + 1; r < n; r++) begin
      f = m[r][p] / m[p][p];
      for (int c = p; c <= n; c++) m[r][c] -= f * m[p][c];
    end
    for (int r = n - 1; r >= 0; r--) begin
      s = m[r][n];
      for (int c = r + 1; c < n; c++) s -= m[r][c] * a[c];
      a[r] = s / m[r][r];
    end
  endfunction

  // expected results per frame
  typedef struct { bit err; lane_class_t cls; int nw, ny; real la[4]; real ta[4]; } exp_t;
  exp_t q[$];
  int got = 0;

  // draw and send a frame; yellow line x = y0 + y1*row, white line x = w0 + w1*row + w2*row^2
  task automatic frame(real y0, real y1, int yhalf, real w0, real w1, real w2, int whalf, int rstep, bit expect_out);
    real xs_w[$], ys_w[$], xs_y[$], ys_y[$], a[4], tx[$], ty[$];
    exp_t e;
    e.nw = 0; e.ny = 0;
    for (int v = 0; v < 480; v += rstep)
      for (int u = 0; u < 640; u += 4) begin
        lane_class_t c;
        longint nx, ny, dn;
        real yl, wl;
        yl = y0 + y1 * v; wl = w0 + w1 * v + w2 * v * v;
        c = LANE_NONE;
        if (u > wl - whalf && u < wl + whalf) c = LANE_WHITE;
        if (u > yl - yhalf && u < yl + yhalf) c = LANE_YELLOW;
        in_valid = 1;
        in_pix.x = 10'(u); in_pix.y = 9'(v);
        in_pix.rgb = (c == LANE_YELLOW) ? 24'hE6C828 : (c == LANE_WHITE) ? 24'hF0F0F0 : 24'h3C3C46;
        in_pix.last = (v + rstep >= 480) && (u == 636);
        @(negedge clk);
        nx = longint'(hmat[0]) * u + longint'(hmat[1]) * v + hmat[2];
        ny = longint'(hmat[3]) * u + longint'(hmat[4]) * v + hmat[5];
        dn = longint'(hmat[6]) * u + longint'(hmat[7]) * v + hmat[8];
        if (c != LANE_NONE && dn > 0 && nx >= 0 && ny >= 0 && nx / dn < 640 && ny / dn < 480) begin
          if (c == LANE_WHITE) begin e.nw++; xs_w.push_back((ny / dn) / 512.0); ys_w.push_back((nx / dn) / 512.0); end
          else begin e.ny++; xs_y.push_back((ny / dn) / 512.0); ys_y.push_back((nx / dn) / 512.0); end
        end
      end
    in_valid = 0;
    if (!expect_out) return;
    e.cls = (e.ny > e.nw) ? LANE_YELLOW : LANE_WHITE;
    e.err = (e.nw + e.ny) == 0;
    if (!e.err) begin
      if (e.cls == LANE_YELLOW) fit(2, xs_y, ys_y, a); else fit(2, xs_w, ys_w, a);
      e.la = a;
      for (int i = 0; i < 30; i++) begin
        real xn;
        xn = i * 16 / 512.0;
        tx.push_back(real'(longint'(q32(scale) * (480 / 512.0 - xn) * 4096.0)) / 4096.0);
        ty.push_back(q32(scale) * (320 / 512.0 - (a[0] + a[1] * xn + a[2] * xn * xn + q32(shift))));
      end
      fit(3, tx, ty, a);
      e.ta = a;
    end
    q.push_back(e);
  endtask

  function automatic bit close(real a, real b, real tol); return (a - b < tol) && (b - a < tol); endfunction

  always @(posedge clk) if (rst_n && res_valid) begin
    exp_t e;
    e = q.pop_front();
    got++;
    checks++;
    if (res_err != e.err) begin failures++; $display("frame %0d err %0d exp %0d", got, res_err, e.err); end
    if (!e.err) begin
      checks += 3;
      if (res_cls != e.cls) begin failures++; $display("frame %0d colour %0d exp %0d", got, res_cls, e.cls); end
      if (int'(n_white) != e.nw || int'(n_yellow) != e.ny) begin
        failures++; $display("frame %0d counts w %0d y %0d exp %0d %0d", got, n_white, n_yellow, e.nw, e.ny);
      end
      for (int k = 0; k < 3; k++) if (!close(q32(lane_coef[k]), e.la[k], 2e-4)) begin
        failures++; $display("frame %0d lane a%0d %f exp %f", got, k, q32(lane_coef[k]), e.la[k]);
      end
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (!close(q32(traj_coef[k]), e.ta[k], 3e-3)) begin
          failures++; $display("frame %0d traj a%0d %f exp %f", got, k, q32(traj_coef[k]), e.ta[k]);
        end
      end
    end
    $display("frame %0d: colour %0d white %0d yellow %0d lane %f %f %f", got, res_cls, n_white, n_yellow,
             q32(lane_coef[0]), q32(lane_coef[1]), q32(lane_coef[2]));
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    hmat = '{32'sd65536, 32'sd19200, -32'sd9196800, 32'sd0, 32'sd65536, 32'sd0, 32'sd0, 32'sd60, 32'sd36796};
    white_rng  = '{lo: '{h: 0, s: 0, v: 200}, hi: '{h: 179, s: 40, v: 255}};
    yellow_rng = '{lo: '{h: 15, s: 30, v: 120}, hi: '{h: 35, s: 255, v: 255}};
    shift = 64'sd1073741824;      // 0.25
    scale = 64'sd4294967296;      // 1.0
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    frame(200, 0.1, 10, 450, -0.05, 0.0002, 4, 2, 1);   // wide yellow line
    repeat (3000) @(negedge clk);
    frame(150, 0.3, 3, 420, 0.1, -0.0003, 12, 2, 1);    // wide white line
    frame(150, 0.3, 3, 420, 0.1, 0.0, 12, 240, 0);      // tiny frame right behind: skipped
    repeat (3000) @(negedge clk);
    frame(-100, 0.0, 3, 900, 0.0, 0.0, 3, 4, 1);        // no lane at all
    repeat (3000) @(negedge clk);
    checks += 2;
    if (q.size() != 0 || got != 3) begin failures++; $display("results %0d, pending %0d", got, q.size()); end
    if (frames_skipped != 1) begin failures++; $display("frames skipped %0d", frames_skipped); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

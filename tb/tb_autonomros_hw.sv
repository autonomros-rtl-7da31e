// End-to-end testbench of autonomros_hw at its default sizes.
//
// Depth path: a 640x480 depth camera looking forward 250 mm above a floor,
// with a box-shaped obstacle in front, goes through Point Cloud Generation
// and Obstacle Detection; every published point and every grid byte is
// compared with a model computed here (projection equations, camera-to-car
// transform, obstacle box, 64 mm cells, saturating counts). A second full
// frame moves the obstacle; a short frame sent right behind it loses its
// last point (the grid is still being read out), which must show up in
// points_dropped; a final partial frame then closes the merged frame.
// Colour path, in parallel: two full 640x480 frames with yellow and white
// lane markings (one mostly yellow, one mostly white), a tiny frame that
// arrives while the previous frame is being solved (skipped), and a frame
// without markings (error). Lane colour, pixel counts and both fitted
// polynomials are compared with a double precision model.
// Each mechanism (P load, box in/out, saturation, grid swap, dropped point,
// white and yellow decisions, skipped frame, fit error) is counted and must
// occur at least once.
module tb_autonomros_hw;
  import autonomros_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cam_cfg_valid = 0; cam_p_t cam_cfg;
  logic depth_valid = 0; depth_pix_t depth_pix;
  logic pc_valid; point_t pc_pt;
  logic signed [31:0] tmat [12];
  logic grid_valid, grid_last; logic [7:0] grid_idx, grid_data;
  logic [31:0] box_count, points_dropped;
  logic signed [31:0] hmat [9];
  hsv_range_t white_rng, yellow_rng;
  logic signed [63:0] lane_shift, lane_scale;
  logic rgb_valid = 0; rgb_pix_t rgb_pix;
  logic lane_valid, lane_err; lane_class_t lane_cls;
  logic [31:0] lane_n_white, lane_n_yellow, lane_frames_skipped;
  logic signed [63:0] lane_coef [3], traj_coef [4];

  autonomros_hw dut (.*);

  // ---------------- mechanism counters
  int m_pload = 0, m_inbox = 0, m_outbox = 0, m_sat = 0, m_grids = 0;
  int m_white = 0, m_yellow = 0, m_lane_err = 0;

  // ---------------- depth path model
  point_t pc_q[$];
  int grid_q[$][234];
  int cur[234];
  int cur_cnt = 0;
  int cnt_q[$];

  function automatic point_t pcg_model(depth_pix_t d);
    longint nx, ny;
    point_t r;
    nx = longint'(d.x) * longint'(d.w) * 65536 - longint'(cam_cfg.cx) * longint'(d.w) - longint'(cam_cfg.tx);
    ny = longint'(d.y) * longint'(d.w) * 65536 - longint'(cam_cfg.cy) * longint'(d.w) - longint'(cam_cfg.ty);
    r.x_mm = 32'((nx * 256) / longint'(cam_cfg.fx));
    r.y_mm = 32'((ny * 256) / longint'(cam_cfg.fy));
    r.z_mm = 32'(longint'(d.w) * 256);
    r.rgb = d.rgb; r.last = d.last;
    return r;
  endfunction

  task automatic od_model(point_t p, bit dropped);
    longint c [3];
    longint xr, yr;
    if (dropped) return;
    for (int r = 0; r < 3; r++)
      c[r] = ((longint'(tmat[4*r]) * p.x_mm + longint'(tmat[4*r+1]) * p.y_mm + longint'(tmat[4*r+2]) * p.z_mm) >>> 16)
             + longint'(tmat[4*r+3]);
    xr = c[0] - 100 * 256;
    yr = c[1] + 13 * 64 * 256 / 2;
    if (xr >= 0 && xr < 18 * 64 * 256 && yr >= 0 && yr < 13 * 64 * 256 && c[2] >= 20 * 256 && c[2] <= 300 * 256) begin
      int idx;
      idx = int'(xr / (64 * 256)) * 13 + int'(yr / (64 * 256));
      if (cur[idx] < 255) cur[idx]++;
      cur_cnt++;
      m_inbox++;
    end else m_outbox++;
    if (p.last) begin
      grid_q.push_back(cur); cnt_q.push_back(cur_cnt);
      cur = '{default: 0}; cur_cnt = 0;
    end
  endtask

  // depth of the scene at a pixel; obstacle at cols [ox, ox+140), rows [150, 330)
  function automatic logic [15:0] scene(int x, int y, int ox, int od);
    if (x >= ox && x < ox + 140 && y >= 150 && y < 330) return 16'(od);
    if (y > 244) begin
      int w;
      w = int'(250.0 * 612.3 / (y - 238.9));
      return (w > 65535) ? 16'hFFFF : 16'(w);
    end
    return 16'd4000;
  endfunction

  task automatic send_depth(int x, int y, logic [15:0] w, bit last);
    depth_valid = 1;
    depth_pix.x = 10'(x); depth_pix.y = 9'(y); depth_pix.w = w; depth_pix.rgb = 24'(x * 7 + y); depth_pix.last = last;
    pc_q.push_back(pcg_model(depth_pix));
    @(negedge clk);
  endtask

  // points leave the point cloud node in order; the model of the grid is fed
  // from them, and a point the grid could not take is left out
  int pc_seen = 0;
  always @(posedge clk) if (rst_n && pc_valid) begin
    point_t e;
    e = pc_q.pop_front();
    checks++;
    if (pc_pt != e) begin failures++; if (failures < 10) $display("point %0d mismatch", pc_seen); end
    pc_seen++;
    od_model(e, !dut.od_ready);
  end

  int rd_cnt = 0;
  always @(posedge clk) if (rst_n && grid_valid) begin
    checks++;
    if (grid_q.size() == 0) begin failures++; $display("grid without frame"); end
    else begin
      if (int'(grid_data) != grid_q[0][grid_idx] || int'(grid_idx) != rd_cnt) begin
        failures++; if (failures < 10) $display("grid %0d cell %0d got %0d exp %0d", m_grids, grid_idx, grid_data, grid_q[0][grid_idx]);
      end
      if (grid_data == 8'hFF) m_sat++;
      rd_cnt++;
      if (grid_last) begin
        checks++;
        if (int'(box_count) != cnt_q[0]) begin failures++; $display("box count %0d exp %0d", box_count, cnt_q[0]); end
        void'(grid_q.pop_front()); void'(cnt_q.pop_front());
        rd_cnt = 0; m_grids++;
      end
    end
  end

  // ---------------- lane path model
  function automatic real q32(logic signed [63:0] v); return real'(v) / 4294967296.0; endfunction
  function automatic bit close(real a, real b, real tol); return (a - b < tol) && (b - a < tol); endfunction

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

  typedef struct { bit err; lane_class_t cls; int nw, ny; real la[4]; real ta[4]; } lexp_t;
  lexp_t lq[$];

  task automatic lane_frame(real y0, real y1, int yhalf, real w0, real w1, real w2, int whalf, int rstep, int cstep, bit expect_out);
    real xs_w[$], ys_w[$], xs_y[$], ys_y[$], a[4], tx[$], ty[$];
    lexp_t e;
    e.nw = 0; e.ny = 0;
    for (int v = 0; v < 480; v += rstep)
      for (int u = 0; u < 640; u += cstep) begin
        lane_class_t c;
        longint nx, ny, dn;
        real yl, wl;
        yl = y0 + y1 * v; wl = w0 + w1 * v + w2 * v * v;
        c = LANE_NONE;
        if (u > wl - whalf && u < wl + whalf) c = LANE_WHITE;
        if (u > yl - yhalf && u < yl + yhalf) c = LANE_YELLOW;
        rgb_valid = 1;
        rgb_pix.x = 10'(u); rgb_pix.y = 9'(v);
        rgb_pix.rgb = (c == LANE_YELLOW) ? 24'hE6C828 : (c == LANE_WHITE) ? 24'hF0F0F0 : 24'h3C3C46;
        rgb_pix.last = (v + rstep >= 480) && (u + cstep >= 640);
        @(negedge clk);
        nx = longint'(hmat[0]) * u + longint'(hmat[1]) * v + hmat[2];
        ny = longint'(hmat[3]) * u + longint'(hmat[4]) * v + hmat[5];
        dn = longint'(hmat[6]) * u + longint'(hmat[7]) * v + hmat[8];
        if (c != LANE_NONE && dn > 0 && nx >= 0 && ny >= 0 && nx / dn < 640 && ny / dn < 480) begin
          if (c == LANE_WHITE) begin e.nw++; xs_w.push_back((ny / dn) / 512.0); ys_w.push_back((nx / dn) / 512.0); end
          else begin e.ny++; xs_y.push_back((ny / dn) / 512.0); ys_y.push_back((nx / dn) / 512.0); end
        end
      end
    rgb_valid = 0;
    if (!expect_out) return;
    e.cls = (e.ny > e.nw) ? LANE_YELLOW : LANE_WHITE;
    e.err = (e.nw + e.ny) == 0;
    if (!e.err) begin
      if (e.cls == LANE_YELLOW) fit(2, xs_y, ys_y, a); else fit(2, xs_w, ys_w, a);
      e.la = a;
      for (int i = 0; i < 30; i++) begin
        real xn;
        xn = i * 16 / 512.0;
        tx.push_back(real'(longint'(q32(lane_scale) * (480 / 512.0 - xn) * 4096.0)) / 4096.0);
        ty.push_back(q32(lane_scale) * (320 / 512.0 - (a[0] + a[1] * xn + a[2] * xn * xn + q32(lane_shift))));
      end
      fit(3, tx, ty, a);
      e.ta = a;
    end
    lq.push_back(e);
  endtask

  int lanes_got = 0;
  always @(posedge clk) if (rst_n && lane_valid) begin
    lexp_t e;
    e = lq.pop_front();
    lanes_got++;
    checks++;
    if (lane_err != e.err) begin failures++; $display("lane frame %0d err %0d exp %0d", lanes_got, lane_err, e.err); end
    if (lane_err) m_lane_err++;
    if (!e.err) begin
      if (lane_cls == LANE_WHITE) m_white++;
      if (lane_cls == LANE_YELLOW) m_yellow++;
      checks += 3;
      if (lane_cls != e.cls) begin failures++; $display("lane frame %0d colour %0d exp %0d", lanes_got, lane_cls, e.cls); end
      if (int'(lane_n_white) != e.nw || int'(lane_n_yellow) != e.ny) begin
        failures++; $display("lane frame %0d counts %0d %0d exp %0d %0d", lanes_got, lane_n_white, lane_n_yellow, e.nw, e.ny);
      end
      for (int k = 0; k < 3; k++) if (!close(q32(lane_coef[k]), e.la[k], 2e-4)) begin
        failures++; $display("lane frame %0d a%0d %f exp %f", lanes_got, k, q32(lane_coef[k]), e.la[k]);
      end
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (!close(q32(traj_coef[k]), e.ta[k], 3e-3)) begin
          failures++; $display("lane frame %0d traj a%0d %f exp %f", lanes_got, k, q32(traj_coef[k]), e.ta[k]);
        end
      end
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cam_cfg.fx = 32'(int'(615.7 * 65536)); cam_cfg.fy = 32'(int'(612.3 * 65536));
    cam_cfg.cx = 32'(int'(321.4 * 65536)); cam_cfg.cy = 32'(int'(238.9 * 65536));
    cam_cfg.tx = '0; cam_cfg.ty = '0;
    // camera (x right, y down, z forward) -> car (x forward, y left, z up); camera 50 mm behind
    // the car base origin and 250 mm above the floor
    tmat = '{32'sd0, 32'sd0, 32'sd65536, -32'sd12800,
             -32'sd65536, 32'sd0, 32'sd0, 32'sd0,
             32'sd0, -32'sd65536, 32'sd0, 32'sd64000};
    hmat = '{32'sd65536, 32'sd19200, -32'sd9196800, 32'sd0, 32'sd65536, 32'sd0, 32'sd0, 32'sd60, 32'sd36796};
    white_rng  = '{lo: '{h: 0, s: 0, v: 200}, hi: '{h: 179, s: 40, v: 255}};
    yellow_rng = '{lo: '{h: 15, s: 30, v: 120}, hi: '{h: 35, s: 255, v: 255}};
    lane_shift = 64'sd1073741824;   // 0.25 (128 pixels)
    lane_scale = 64'sd4294967296;   // 1.0
    cur = '{default: 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cam_cfg_valid = 1; @(negedge clk); cam_cfg_valid = 0; m_pload++;
    fork
      begin : depth_stream
        for (int f = 0; f < 2; f++)
          for (int y = 0; y < 480; y++)
            for (int x = 0; x < 640; x++)
              send_depth(x, y, scene(x, y, 250 + f * 150, 700 - f * 200), y == 479 && x == 639);
        // short frame right behind: its last point finds the grid busy
        for (int i = 0; i < 100; i++) send_depth(300 + i, 250, 16'd600, i == 99);
        // partial frame that closes the merged frame
        for (int i = 0; i < 3000; i++) send_depth(200 + i % 200, 160 + i / 200, 16'd500, i == 2999);
        depth_valid = 0;
      end
      begin : colour_stream
        lane_frame(200, 0.1, 10, 450, -0.05, 0.0002, 4, 1, 1, 1);
        lane_frame(150, 0.3, 3, 420, 0.1, -0.0003, 12, 1, 1, 1);
        lane_frame(150, 0.3, 3, 420, 0.1, 0.0, 12, 240, 64, 0);
        repeat (3000) @(negedge clk);
        lane_frame(-100, 0.0, 3, 900, 0.0, 0.0, 3, 8, 8, 1);
      end
    join
    repeat (3000) @(negedge clk);
    checks += 3;
    if (pc_q.size() != 0 || grid_q.size() != 0) begin failures++; $display("pending points %0d grids %0d", pc_q.size(), grid_q.size()); end
    if (lq.size() != 0 || lanes_got != 3) begin failures++; $display("lane results %0d pending %0d", lanes_got, lq.size()); end
    if (points_dropped != 1) begin failures++; $display("points dropped %0d", points_dropped); end
    $display("mechanisms: P load %0d, in box %0d, outside box %0d, saturated cells %0d, grids %0d, dropped %0d,",
             m_pload, m_inbox, m_outbox, m_sat, m_grids, points_dropped);
    $display("            white %0d, yellow %0d, skipped %0d, lane errors %0d", m_white, m_yellow, lane_frames_skipped, m_lane_err);
    checks++;
    if (m_pload == 0 || m_inbox == 0 || m_outbox == 0 || m_sat == 0 || m_grids != 3 || points_dropped == 0 ||
        m_white == 0 || m_yellow == 0 || lane_frames_skipped == 0 || m_lane_err == 0) begin
      failures++; $display("a mechanism did not occur");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Self-checking testbench for lsq_solver. For order 2 (lane fit) and order 3
// (trajectory fit) it makes point sets from known polynomials plus noise,
// forms the sums here, runs the solver and compares its coefficients with a
// least-squares solution computed here in double precision. Also checks the
// zero-pivot error (all points at one x) and the solve time.
module tb_lsq_solver;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // order 2, pixel coordinates with 9 fractional bits (x/512)
  logic start2 = 0, busy2, done2, err2;
  logic signed [63:0] sx2 [5], sxy2 [3], c2 [3];
  lsq_solver #(.K(2), .AW(64), .XSH(9), .YSH(9)) dut2 (.clk, .rst_n, .start(start2), .sx(sx2), .sxy(sxy2),
                                                       .busy(busy2), .done(done2), .err(err2), .coef(c2));
  // order 3, coordinates with 12 fractional bits
  logic start3 = 0, busy3, done3, err3;
  logic signed [103:0] sx3 [7], sxy3 [4];
  logic signed [63:0] c3 [4];
  lsq_solver #(.K(3), .AW(104), .XSH(12), .YSH(12)) dut3 (.clk, .rst_n, .start(start3), .sx(sx3), .sxy(sxy3),
                                                          .busy(busy3), .done(done3), .err(err3), .coef(c3));

  // least squares in double precision, normalised coordinates
  function automatic void ref_fit(int kk, real xs[$], real ys[$], output real a[4]);
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

  function automatic real q32(logic signed [63:0] v); return real'(v) / 4294967296.0; endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real xs[$], ys[$], a[4];
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- order 2: five random parabolas through pixel space
    for (int t = 0; t < 5; t++) begin
      real p0, p1, p2;
      longint pw;
      int n;
      p0 = 100 + $urandom_range(0, 400); p1 = (real'($urandom_range(0, 200)) - 100.0) / 100.0;
      p2 = (real'($urandom_range(0, 200)) - 100.0) / 2000.0;
      xs.delete(); ys.delete();
      sx2 = '{default: 0}; sxy2 = '{default: 0};
      n = 500 + t * 3000;
      for (int i = 0; i < n; i++) begin
        int x, y;
        x = $urandom_range(0, 479);
        y = int'(p0 + p1 * x + p2 * x * x) + int'($urandom_range(0, 10)) - 5;
        if (y < 0) y = 0; if (y > 639) y = 639;
        xs.push_back(x / 512.0); ys.push_back(y / 512.0);
        pw = 1;
        for (int k = 0; k < 5; k++) begin
          sx2[k] += pw;
          if (k < 3) sxy2[k] += pw * y;
          pw *= x;
        end
      end
      ref_fit(2, xs, ys, a);
      @(negedge clk); start2 = 1; @(negedge clk); start2 = 0;
      cyc = 0;
      while (!done2) begin @(negedge clk); cyc++; end
      checks++;
      if (err2) begin failures++; $display("order 2: unexpected error"); end
      for (int k = 0; k < 3; k++) begin
        checks++;
        if ((q32(c2[k]) - a[k]) > 1e-4 || (a[k] - q32(c2[k])) > 1e-4) begin
          failures++; $display("order 2 set %0d a%0d = %f exp %f", t, k, q32(c2[k]), a[k]);
        end
      end
      // 6 divisions of DW+F+1 cycles plus the control states
      checks++;
      if (cyc > 6 * 100 + 30) begin failures++; $display("order 2 solve took %0d cycles", cyc); end
    end
    // ---- order 2: all points at the same x -> singular
    sx2 = '{100, 100 * 50, 100 * 2500, 100 * 125000, 100 * 6250000};
    sxy2 = '{100 * 7, 100 * 7 * 50, 100 * 7 * 2500};
    @(negedge clk); start2 = 1; @(negedge clk); start2 = 0;
    while (!done2) @(negedge clk);
    checks++;
    if (!err2) begin failures++; $display("singular system not flagged"); end
    // ---- order 3: 30 points of a cubic, coordinates with 12 fractional bits
    for (int t = 0; t < 4; t++) begin
      real b [4];
      logic signed [103:0] pw;
      for (int k = 0; k < 4; k++) b[k] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0;
      xs.delete(); ys.delete();
      sx3 = '{default: 0}; sxy3 = '{default: 0};
      for (int i = 0; i < 30; i++) begin
        int xi, yi;
        real xr;
        xr = (480 - i * 16) / 512.0;
        xi = int'(xr * 4096);
        yi = int'((b[0] + b[1] * xr + b[2] * xr * xr + b[3] * xr * xr * xr) * 4096);
        xs.push_back(xi / 4096.0); ys.push_back(yi / 4096.0);
        pw = 1;
        for (int k = 0; k < 7; k++) begin
          sx3[k] += pw;
          if (k < 4) sxy3[k] += pw * 104'(signed'(yi));
          pw *= 104'(signed'(xi));
        end
      end
      ref_fit(3, xs, ys, a);
      @(negedge clk); start3 = 1; @(negedge clk); start3 = 0;
      while (!done3) @(negedge clk);
      checks++;
      if (err3) begin failures++; $display("order 3: unexpected error"); end
      for (int k = 0; k < 4; k++) begin
        checks++;
        if ((q32(c3[k]) - a[k]) > 1e-3 || (a[k] - q32(c3[k])) > 1e-3) begin
          failures++; $display("order 3 set %0d a%0d = %f exp %f (true %f)", t, k, q32(c3[k]), a[k], b[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

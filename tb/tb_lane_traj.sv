// Self-checking testbench for lane_traj: for several lane parabolas, shifts
// and scales it rebuilds the 30 trajectory points here (x_i = i*16), moves
// them into the car frame, fits a cubic in double precision and compares the
// result with the block's coefficients. Also checks the out-of-range error
// and that the block needs fewer cycles than one camera frame.
module tb_lane_traj;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, busy, done, err;
  logic signed [63:0] lane_coef [3], shift, scale, traj_coef [4];

  lane_traj dut (.clk, .rst_n, .start, .lane_coef, .shift, .scale, .busy, .done, .err, .traj_coef);

  function automatic logic signed [63:0] toq(real v); return 64'(longint'(v * 4294967296.0)); endfunction
  function automatic real q32(logic signed [63:0] v); return real'(v) / 4294967296.0; endfunction

  function automatic void ref_fit(real xs[$], real ys[$], output real a[4]);
    real m [4][5];
    real f, s;
    for (int r = 0; r < 4; r++) for (int c = 0; c <= 4; c++) m[r][c] = 0.0;
    foreach (xs[i]) for (int r = 0; r < 4; r++) begin
      for (int c = 0; c < 4; c++) m[r][c] += xs[i] ** (r + c);
      m[r][4] += ys[i] * xs[i] ** r;
    end
    for (int p = 0; p < 4; p++) for (int r = p + 1; r < 4; r++) begin
      f = m[r][p] / m[p][p];
      for (int c = p; c <= 4; c++) m[r][c] -= f * m[p][c];
    end
    for (int r = 3; r >= 0; r--) begin
      s = m[r][4];
      for (int c = r + 1; c < 4; c++) s -= m[r][c] * a[c];
      a[r] = s / m[r][r];
    end
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_case(real l0, real l1, real l2, real sh, real sc, bit expect_err);
    real xs[$], ys[$], a[4];
    int cyc;
    lane_coef = '{toq(l0), toq(l1), toq(l2)}; shift = toq(sh); scale = toq(sc);
    for (int i = 0; i < 30; i++) begin
      real xn, yv;
      xn = i * 16 / 512.0;
      yv = l0 + l1 * xn + l2 * xn * xn + sh;
      xs.push_back(real'(longint'(sc * (480 / 512.0 - xn) * 4096.0)) / 4096.0);
      ys.push_back(sc * (320 / 512.0 - yv));
    end
    ref_fit(xs, ys, a);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (err != expect_err) begin failures++; $display("err=%0d expected %0d", err, expect_err); end
    if (!expect_err)
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (q32(traj_coef[k]) - a[k] > 2e-3 || a[k] - q32(traj_coef[k]) > 2e-3) begin
          failures++; $display("a%0d = %f exp %f", k, q32(traj_coef[k]), a[k]);
        end
      end
    checks++;
    if (cyc > 2000) begin failures++; $display("took %0d cycles", cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case(0.3, 0.2, -0.1, 0.25, 1.0, 0);
    run_case(0.9, -0.4, 0.3, -0.25, 2.0, 0);
    run_case(0.5, 0.0, 0.0, 0.0, 0.5, 0);
    run_case(0.2, 1.1, -0.6, 0.1, 3.0, 0);
    run_case(1.0, 0.0, 0.0, 500.0, 1.0, 1);   // y far outside the fit's range
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

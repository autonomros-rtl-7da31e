// Self-checking testbench for pcg_core: loads a projection matrix, streams
// random pixels (back to back and with gaps), and compares every point with
// the projection equations evaluated here in 64-bit integer arithmetic.
// Also checks that a burst of N back-to-back pixels gives N back-to-back
// points (one point per cycle) and reloads P once to check the reload.
module tb_pcg_core;
  import autonomros_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_valid = 0; cam_p_t cfg;
  logic in_valid = 0;  depth_pix_t in_pix;
  logic out_valid;     point_t out_pt;
  int checks = 0, failures = 0;

  pcg_core dut (.clk, .rst_n, .cfg_valid, .cfg, .in_valid, .in_pix, .out_valid, .out_pt);

  point_t exp_q[$];
  int run_len = 0, max_run = 0;

  function automatic point_t model(cam_p_t p, depth_pix_t d);
    longint nx, ny;
    point_t r;
    nx = longint'(d.x) * longint'(d.w) * 65536 - longint'(p.cx) * longint'(d.w) - longint'(p.tx);
    ny = longint'(d.y) * longint'(d.w) * 65536 - longint'(p.cy) * longint'(d.w) - longint'(p.ty);
    r.x_mm = 32'((nx * 256) / longint'(p.fx));
    r.y_mm = 32'((ny * 256) / longint'(p.fy));
    r.z_mm = 32'(longint'(d.w) * 256);
    r.rgb = d.rgb; r.last = d.last;
    return r;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    point_t e;
    run_len++; if (run_len > max_run) max_run = run_len;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_q.pop_front();
      if (out_pt !== e) begin
        failures++;
        if (failures < 10) $display("mismatch got %0d %0d %0d exp %0d %0d %0d", out_pt.x_mm, out_pt.y_mm, out_pt.z_mm, e.x_mm, e.y_mm, e.z_mm);
      end
    end
  end else if (rst_n) run_len = 0;

  // inputs change on the falling edge: one pixel per call, one cycle each
  task automatic send(depth_pix_t d);
    in_valid = 1; in_pix = d;
    exp_q.push_back(model(cfg, d));
    @(negedge clk);
  endtask
  task automatic idle(int n);
    in_valid = 0;
    repeat (n) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    depth_pix_t d;
    cfg.fx = 32'(int'(615.7 * 65536)); cfg.fy = 32'(int'(612.3 * 65536));
    cfg.cx = 32'(int'(321.4 * 65536)); cfg.cy = 32'(int'(238.9 * 65536));
    cfg.tx = 32'(-int'(3.5 * 65536));  cfg.ty = 32'(int'(1.25 * 65536));
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_valid = 1; @(negedge clk); cfg_valid = 0;
    // burst of 200 back-to-back pixels
    for (int i = 0; i < 200; i++) begin
      d.x = 10'($urandom_range(0, 639)); d.y = 9'($urandom_range(0, 479));
      d.w = 16'($urandom_range(0, 65535)); d.rgb = 24'($urandom); d.last = (i == 199);
      send(d);
    end
    // corners and extremes
    d = '{x:0, y:0, w:16'hFFFF, rgb:0, last:0}; send(d);
    d = '{x:639, y:479, w:16'hFFFF, rgb:1, last:0}; send(d);
    d = '{x:320, y:240, w:0, rgb:2, last:1}; send(d);
    // gaps
    for (int i = 0; i < 100; i++) begin
      d.x = 10'($urandom_range(0, 639)); d.y = 9'($urandom_range(0, 479));
      d.w = 16'($urandom_range(200, 10000)); d.rgb = 24'($urandom); d.last = 0;
      send(d);
      idle($urandom_range(0, 3));
    end
    idle(100);
    // reload P (different camera) and stream again
    cfg.fx = 32'(int'(380.0 * 65536)); cfg.cx = 32'(int'(100.5 * 65536)); cfg.tx = 32'(int'(-45.6 * 380 * 65536));
    cfg_valid = 1; @(negedge clk); cfg_valid = 0;
    for (int i = 0; i < 100; i++) begin
      d.x = 10'($urandom_range(0, 639)); d.y = 9'($urandom_range(0, 479));
      d.w = 16'($urandom_range(0, 65535)); d.rgb = 24'($urandom); d.last = 0;
      send(d);
    end
    idle(100);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d points missing", exp_q.size()); end
    checks++;
    if (max_run < 203) begin failures++; $display("throughput: longest output run %0d", max_run); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

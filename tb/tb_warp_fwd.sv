// Self-checking testbench for warp_fwd: a bird's-eye homography of the kind
// used for a forward-looking camera (rows near the horizon stretched), random
// marked and unmarked pixels, back to back; every output is compared with a
// 64-bit integer model. Checks that pixels land both inside and outside the
// image and that frame-end flags always come through.
module tb_warp_fwd;
  import autonomros_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [31:0] hmat [9];
  logic in_valid = 0; class_pix_t in_pix;
  logic out_valid, out_ok; class_pix_t out_pix;
  int checks = 0, failures = 0, n_ok = 0, n_out = 0, n_last = 0;

  warp_fwd dut (.clk, .rst_n, .hmat, .in_valid, .in_pix, .out_valid, .out_ok, .out_pix);

  typedef struct { bit ok; int x, y; lane_class_t c; bit last; } exp_t;
  exp_t q[$];

  task automatic send(class_pix_t p);
    longint nx, ny, dn;
    exp_t e;
    in_valid = 1; in_pix = p;
    nx = longint'(hmat[0]) * p.x + longint'(hmat[1]) * p.y + hmat[2];
    ny = longint'(hmat[3]) * p.x + longint'(hmat[4]) * p.y + hmat[5];
    dn = longint'(hmat[6]) * p.x + longint'(hmat[7]) * p.y + hmat[8];
    e.ok = 0; e.x = 0; e.y = 0;
    if (p.cls != LANE_NONE && dn > 0 && nx >= 0 && ny >= 0) begin
      e.x = int'(nx / dn); e.y = int'(ny / dn);
      e.ok = (e.x < 640 && e.y < 480);
    end
    e.c = p.cls; e.last = p.last;
    q.push_back(e);
    @(negedge clk);
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    e = q.pop_front();
    if (out_ok != e.ok || out_pix.last != e.last || out_pix.cls != e.c ||
        (e.ok && (int'(out_pix.x) != e.x || int'(out_pix.y) != e.y))) begin
      failures++;
      if (failures < 10) $display("got ok=%0d %0d,%0d exp ok=%0d %0d,%0d", out_ok, out_pix.x, out_pix.y, e.ok, e.x, e.y);
    end
    if (e.ok) n_ok++; else if (e.c != LANE_NONE) n_out++;
    if (out_pix.last) n_last++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    class_pix_t p;
    // u' = (u - 320)*k + 320 with k growing toward the top rows, v' = stretched rows
    hmat = '{32'sd65536, -32'sd20000, 32'sd6400000,
             32'sd0, 32'sd32768, 32'sd0,
             32'sd0, -32'sd100, 32'sd65536};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 4000; i++) begin
      p.x = 10'($urandom_range(0, 639)); p.y = 9'($urandom_range(0, 479));
      p.cls = lane_class_t'($urandom_range(0, 2)); p.last = (i % 1000 == 999);
      send(p);
    end
    in_valid = 0;
    repeat (60) @(negedge clk);
    checks++;
    if (q.size() != 0 || n_ok == 0 || n_out == 0 || n_last != 4) begin
      failures++; $display("left %0d inside %0d outside %0d lasts %0d", q.size(), n_ok, n_out, n_last);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

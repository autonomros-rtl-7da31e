// Self-checking testbench for color_threshold: random HSV pixels and
// pixels on the edges of the white and yellow ranges, compared with an
// independent in-range model; checks that both classes and the overlap
// rule (yellow wins) occur.
module tb_color_threshold;
  import autonomros_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  hsv_range_t wr, yr;
  logic in_valid = 0; hsv_t in_hsv; logic [7:0] in_tag;
  logic out_valid; lane_class_t out_cls; logic [7:0] out_tag;
  int checks = 0, failures = 0, n_w = 0, n_y = 0, n_both = 0;

  color_threshold #(.TW(8)) dut (.clk, .rst_n, .white_rng(wr), .yellow_rng(yr), .in_valid, .in_hsv, .in_tag,
                                 .out_valid, .out_cls, .out_tag);

  lane_class_t q[$];
  function automatic bit inr(int v, int lo, int hi); return v >= lo && v <= hi; endfunction

  task automatic send(int h, int s, int v);
    bit w, y;
    in_valid = 1; in_hsv = '{h: 8'(h), s: 8'(s), v: 8'(v)}; in_tag = 8'(q.size());
    w = inr(h, 0, 179) && inr(s, 0, 40) && inr(v, 200, 255);
    y = inr(h, 15, 35) && inr(s, 30, 255) && inr(v, 120, 255);
    if (w && y) n_both++;
    q.push_back(y ? LANE_YELLOW : (w ? LANE_WHITE : LANE_NONE));
    @(negedge clk);
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    lane_class_t e;
    checks++;
    e = q.pop_front();
    if (e == LANE_WHITE) n_w++;
    if (e == LANE_YELLOW) n_y++;
    if (out_cls != e) begin failures++; if (failures < 10) $display("got %0d exp %0d", out_cls, e); end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr = '{lo: '{h: 0, s: 0, v: 200}, hi: '{h: 179, s: 40, v: 255}};
    yr = '{lo: '{h: 15, s: 30, v: 120}, hi: '{h: 35, s: 255, v: 255}};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // edges of the ranges
    send(15, 30, 120); send(14, 30, 120); send(35, 255, 255); send(36, 255, 255);
    send(100, 40, 200); send(100, 41, 200); send(100, 40, 199); send(20, 35, 220);
    for (int i = 0; i < 3000; i++)
      if (i % 3 == 0) send($urandom_range(0, 179), $urandom_range(0, 60), $urandom_range(150, 255));
      else send($urandom_range(0, 60), $urandom_range(0, 255), $urandom_range(0, 255));
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (q.size() != 0 || n_w == 0 || n_y == 0 || n_both == 0) begin
      failures++; $display("coverage: left %0d white %0d yellow %0d both %0d", q.size(), n_w, n_y, n_both);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

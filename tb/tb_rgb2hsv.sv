// Self-checking testbench for rgb2hsv: known colours (red, green, blue,
// yellow, white, black, a dark magenta whose hue wraps) and 3000 random
// pixels, back to back, against an integer model of the conversion.
module tb_rgb2hsv;
  import autonomros_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0; logic [23:0] in_rgb; logic [15:0] in_tag;
  logic out_valid; hsv_t out_hsv; logic [15:0] out_tag;
  int checks = 0, failures = 0;

  rgb2hsv #(.TW(16)) dut (.clk, .rst_n, .in_valid, .in_rgb, .in_tag, .out_valid, .out_hsv, .out_tag);

  typedef struct { hsv_t h; logic [15:0] tag; } exp_t;
  exp_t q[$];

  function automatic hsv_t model(int r, int g, int b);
    int mx, mn, h;
    hsv_t o;
    mx = (r > g ? r : g); mx = (mx > b ? mx : b);
    mn = (r < g ? r : g); mn = (mn < b ? mn : b);
    o.v = 8'(mx);
    o.s = (mx == 0) ? 8'd0 : 8'((255 * (mx - mn)) / mx);
    if (mx == mn) h = 0;
    else if (mx == r) h = (30 * (g - b)) / (mx - mn);
    else if (mx == g) h = 60 + (30 * (b - r)) / (mx - mn);
    else h = 120 + (30 * (r - g)) / (mx - mn);
    if (h < 0) h += 180;
    o.h = 8'(h);
    return o;
  endfunction

  task automatic send(logic [23:0] rgb, logic [15:0] tag);
    exp_t e;
    in_valid = 1; in_rgb = rgb; in_tag = tag;
    e.h = model(int'(rgb[23:16]), int'(rgb[15:8]), int'(rgb[7:0])); e.tag = tag;
    q.push_back(e);
    @(negedge clk);
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    e = q.pop_front();
    if (out_hsv != e.h || out_tag != e.tag) begin
      failures++;
      if (failures < 10) $display("tag %0d got %0d/%0d/%0d exp %0d/%0d/%0d", out_tag, out_hsv.h, out_hsv.s, out_hsv.v, e.h.h, e.h.s, e.h.v);
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    send(24'hFF0000, 1); send(24'h00FF00, 2); send(24'h0000FF, 3); send(24'hFFFF00, 4);
    send(24'hFFFFFF, 5); send(24'h000000, 6); send(24'h800040, 7); send(24'h10FF80, 8);
    for (int i = 0; i < 3000; i++) send(24'($urandom), 16'(i + 100));
    in_valid = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    // spot checks of the known hues against fixed numbers
    checks++;
    if (model(255, 255, 0).h != 30 || model(0, 0, 255).h != 120 || model(128, 0, 64).h != 165) begin
      failures++; $display("model self-check failed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

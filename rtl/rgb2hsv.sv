// RGB to HSV colour space conversion, first step of lane detection.
//
// 8-bit HSV in the usual image-library convention: V = max(R,G,B);
// S = 255*(V-min)/V (0 when V = 0); H in 0..179 (degrees / 2):
//   V == R: H = 30*(G-B)/(V-min)        (negative results wrap by +180)
//   V == G: H = 60 + 30*(B-R)/(V-min)
//   V == B: H = 120 + 30*(R-G)/(V-min)
//   V == min: H = 0
// The quotients are rounded toward zero. The paper names the conversion and
// its purpose (thresholding independent of lighting); the exact integer
// formula and rounding are this design's choice.
//
// Timing: one pixel per cycle, result DIV_W+2 cycles later with a tag
// (pixel coordinates, frame end) carried alongside. No back-pressure.
module rgb2hsv
  import autonomros_pkg::*;
#(
  parameter int unsigned TW = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [23:0]   in_rgb,
  input  logic [TW-1:0] in_tag,
  output logic          out_valid,
  output hsv_t          out_hsv,
  output logic [TW-1:0] out_tag
);
  localparam int unsigned DIV_W = 16;
  localparam int unsigned CTW   = TW + 8 + 8 + 1 + 2; // tag, V, hue base, sign, sector valid

  logic [7:0] r, g, b, mx, mn, d;
  logic [7:0] base;
  logic       neg;
  logic [7:0] delta;
  always_comb begin
    {r, g, b} = in_rgb;
    mx = (r >= g) ? ((r >= b) ? r : b) : ((g >= b) ? g : b);
    mn = (r <= g) ? ((r <= b) ? r : b) : ((g <= b) ? g : b);
    d  = mx - mn;
    if (mx == r) begin
      base = 8'd0;   neg = (g < b); delta = (g >= b) ? g - b : b - g;
    end else if (mx == g) begin
      base = 8'd60;  neg = (b < r); delta = (b >= r) ? b - r : r - b;
    end else begin
      base = 8'd120; neg = (r < g); delta = (r >= g) ? r - g : g - r;
    end
  end

  // stage 1: register dividends
  logic              s1_v;
  logic [DIV_W-1:0]  s1_snum, s1_hnum;
  logic [7:0]        s1_sden, s1_hden;
  logic [CTW-1:0]    s1_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_v <= 1'b0;
    else        s1_v <= in_valid;
  end
  always_ff @(posedge clk) begin
    s1_snum <= DIV_W'(d) * DIV_W'(255);
    s1_sden <= mx;
    s1_hnum <= DIV_W'(delta) * DIV_W'(30);
    s1_hden <= d;
    s1_tag  <= {in_tag, mx, base, neg, (d != 8'd0), (mx != 8'd0)};
  end

  logic [DIV_W-1:0] sq, hq;
  logic [CTW-1:0]   ctag;
  logic             vs, vh;
  logic             unused_h;
  div_pipe #(.NW(DIV_W), .DW(8), .TW(CTW)) u_sdiv (
    .clk, .rst_n, .in_valid(s1_v), .num(s1_snum), .den(s1_sden), .tag_in(s1_tag),
    .out_valid(vs), .quo(sq), .tag_out(ctag));
  div_pipe #(.NW(DIV_W), .DW(8), .TW(1)) u_hdiv (
    .clk, .rst_n, .in_valid(s1_v), .num(s1_hnum), .den(s1_hden), .tag_in(1'b0),
    .out_valid(vh), .quo(hq), .tag_out(unused_h));

  logic [7:0]  c_v, c_base;
  logic        c_neg, c_dnz, c_vnz;
  logic [TW-1:0] c_tag;
  logic signed [9:0] h_s;
  always_comb begin
    {c_tag, c_v, c_base, c_neg, c_dnz, c_vnz} = ctag;
    h_s = c_neg ? $signed({2'b0, c_base}) - $signed({2'b0, hq[7:0]})
                : $signed({2'b0, c_base}) + $signed({2'b0, hq[7:0]});
    if (h_s < 0) h_s = h_s + 10'sd180;
    if (!c_dnz)  h_s = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vs;
  end
  always_ff @(posedge clk) begin
    out_hsv.v <= c_v;
    out_hsv.s <= c_vnz ? sq[7:0] : 8'd0;
    out_hsv.h <= h_s[7:0];
    out_tag   <= c_tag;
  end

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) vs == vh);
endmodule

// Colour thresholding for white and yellow lane markings.
//
// Both colours are tested in parallel, as in the paper. A pixel matches a
// colour when each of its H, S and V values lies in that colour's inclusive
// range [lo, hi] (the in-range test of common image libraries). The two
// results are merged into one class image: yellow, white or none; a pixel
// that falls in both ranges is classed yellow (this design's choice, as are
// the ranges, which are inputs set by the caller). Paper: thresholding of
// both colours in parallel into one image of white and yellow pixels.
//
// Timing: one pixel per cycle, registered output one cycle later, with the
// tag carried alongside.
module color_threshold
  import autonomros_pkg::*;
#(
  parameter int unsigned TW = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  hsv_range_t    white_rng,
  input  hsv_range_t    yellow_rng,
  input  logic          in_valid,
  input  hsv_t          in_hsv,
  input  logic [TW-1:0] in_tag,
  output logic          out_valid,
  output lane_class_t   out_cls,
  output logic [TW-1:0] out_tag
);
  function automatic logic in_range(hsv_t p, hsv_range_t rg);
    return (p.h >= rg.lo.h) && (p.h <= rg.hi.h)
        && (p.s >= rg.lo.s) && (p.s <= rg.hi.s)
        && (p.v >= rg.lo.v) && (p.v <= rg.hi.v);
  endfunction

  logic is_w, is_y;
  always_comb begin
    is_w = in_range(in_hsv, white_rng);
    is_y = in_range(in_hsv, yellow_rng);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_cls   <= LANE_NONE;
    end else begin
      out_valid <= in_valid;
      out_cls   <= is_y ? LANE_YELLOW : (is_w ? LANE_WHITE : LANE_NONE);
    end
  end
  always_ff @(posedge clk) out_tag <= in_tag;
endmodule

// Fully pipelined unsigned divider (restoring division, one quotient bit per
// stage). It accepts one division per cycle and delivers the quotient NW
// cycles later, together with a tag that travels alongside (for the data the
// caller needs again at the output). Division by zero yields all ones.
// Used by the per-pixel stages that divide: the point cloud projection,
// the HSV conversion and the perspective warp. The paper does not say how
// these divisions are done; a bit-serial pipeline is this design's choice.
//
// Interface: in_valid/num/den/tag_in enter every cycle there is data;
// out_valid/quo/tag_out follow exactly NW cycles later. No back-pressure.
module div_pipe #(
  parameter int unsigned NW = 32,   // numerator and quotient width
  parameter int unsigned DW = 16,   // denominator width
  parameter int unsigned TW = 1     // tag width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  input  logic [TW-1:0] tag_in,
  output logic          out_valid,
  output logic [NW-1:0] quo,
  output logic [TW-1:0] tag_out
);
  // stage s holds the state after s quotient bits have been produced
  logic          v_q [NW+1];
  logic [NW-1:0] n_q [NW+1];
  logic [NW-1:0] q_q [NW+1];
  logic [DW-1:0] r_q [NW+1];
  logic [DW-1:0] d_q [NW+1];
  logic [TW-1:0] t_q [NW+1];

  assign v_q[0] = in_valid;
  assign n_q[0] = num;
  assign q_q[0] = '0;
  assign r_q[0] = '0;
  assign d_q[0] = den;
  assign t_q[0] = tag_in;

  for (genvar s = 0; s < NW; s++) begin : g_stage
    logic [DW:0]   trial;
    logic          ge;
    always_comb begin
      trial = {r_q[s], n_q[s][NW-1-s]};
      ge    = (trial >= {1'b0, d_q[s]});
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) v_q[s+1] <= 1'b0;
      else        v_q[s+1] <= v_q[s];
    end
    always_ff @(posedge clk) begin
      n_q[s+1] <= n_q[s];
      d_q[s+1] <= d_q[s];
      t_q[s+1] <= t_q[s];
      r_q[s+1] <= ge ? DW'(trial - {1'b0, d_q[s]}) : trial[DW-1:0];
      q_q[s+1] <= q_q[s] | (ge ? (NW'(1) << (NW-1-s)) : '0);
    end
  end

  assign out_valid = v_q[NW];
  assign quo       = q_q[NW];
  assign tag_out   = t_q[NW];
endmodule

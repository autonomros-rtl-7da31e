// Sequential signed divider: quotient = trunc(num / den), rounded toward
// zero, one quotient bit per cycle (NW+1 cycles from start to done). Used by
// the least-squares solver, which needs only a handful of divisions per frame,
// so a small iterative unit is enough. A zero divisor sets div_zero and
// returns 0. The paper does not describe the divider; it is this design's
// choice.
//
// Interface: pulse start with num/den while busy is low; done pulses for one
// cycle with quo valid; quo holds until the next start.
module seq_div #(
  parameter int unsigned NW = 96,   // signed numerator / quotient width
  parameter int unsigned DW = 64    // signed denominator width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [NW-1:0] num,
  input  logic signed [DW-1:0] den,
  output logic                 busy,
  output logic                 done,
  output logic                 div_zero,
  output logic signed [NW-1:0] quo
);
  logic [NW-1:0] n_mag, q_mag;
  logic [DW-1:0] d_mag, rem;
  logic          neg;
  logic [$clog2(NW+1)-1:0] cnt;
  logic [DW:0]   trial;

  always_comb trial = {rem, n_mag[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; div_zero <= 1'b0; quo <= '0;
      n_mag <= '0; q_mag <= '0; d_mag <= '0; rem <= '0; neg <= 1'b0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        n_mag    <= num[NW-1] ? NW'(-num) : NW'(num);
        d_mag    <= den[DW-1] ? DW'(-den) : DW'(den);
        neg      <= num[NW-1] ^ den[DW-1];
        rem      <= '0;
        q_mag    <= '0;
        cnt      <= '0;
        div_zero <= (den == '0);
        busy     <= (den != '0);
        done     <= (den == '0);
        if (den == '0) quo <= '0;
      end else if (busy) begin
        if (trial >= {1'b0, d_mag}) begin
          rem   <= DW'(trial - {1'b0, d_mag});
          q_mag <= {q_mag[NW-2:0], 1'b1};
        end else begin
          rem   <= trial[DW-1:0];
          q_mag <= {q_mag[NW-2:0], 1'b0};
        end
        n_mag <= {n_mag[NW-2:0], 1'b0};
        cnt   <= cnt + 1'b1;
        if (cnt == ($clog2(NW+1))'(NW-1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= neg ? -$signed({q_mag[NW-2:0], (trial >= {1'b0, d_mag})})
                      :  $signed({q_mag[NW-2:0], (trial >= {1'b0, d_mag})});
        end
      end
    end
  end
endmodule

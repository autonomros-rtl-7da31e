// Solver of the least-squares normal equations for a polynomial of order K.
//
// Loads the sums from lsq_moments, builds the (K+1)x(K+2) augmented matrix
//   A[r][c] = sum x^(r+c),  A[r][K+1] = sum y*x^r
// and solves it for the coefficients a0..aK by Gaussian elimination followed
// by back substitution. The matrix is symmetric positive definite whenever
// the points determine the polynomial, so no pivot search is made; a zero
// pivot (too few distinct x) ends the solve with err high.
//
// Number scaling: the integer sums come from points whose real coordinates
// are x_int / 2^XSH and y_int / 2^YSH. They are converted into signed fixed
// point with F fractional bits (DW bits wide), so the entries stay of similar
// size, and the coefficients come out in the same format, meaning
//   y_int / 2^YSH = sum_j coef[j] * (x_int / 2^XSH)^j.
// The paper states the system (and that it is solved); the elimination
// order, the fixed-point scaling and the error rule are this design's.
//
// Hardware: one signed divider shared by all divisions (DW+F+1 cycles each),
// K+2 multipliers for a row update. Timing: start while busy is low; done
// pulses after about K(K+1)/2 + K+1 divisions.
module lsq_solver #(
  parameter int unsigned K   = 2,
  parameter int unsigned AW  = 64,   // width of the incoming sums
  parameter int unsigned XSH = 9,    // fractional bits of the x the sums were made of
  parameter int unsigned YSH = 9,    // fractional bits of the y
  parameter int unsigned F   = 32,   // fractional bits of the solver
  parameter int unsigned DW  = 64    // width of the solver's numbers
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [AW-1:0] sx  [2*K+1],
  input  logic signed [AW-1:0] sxy [K+1],
  output logic                 busy,
  output logic                 done,
  output logic                 err,
  output logic signed [DW-1:0] coef [K+1]
);
  localparam int unsigned M  = K + 1;
  localparam int unsigned IW = (M > 1) ? $clog2(M) : 1; // row index width
  localparam int unsigned NW = DW + F;
  localparam int unsigned CW = AW + F + 2;

  // integer sum with sh fractional bits -> DW-bit value with F fractional bits
  function automatic logic signed [DW-1:0] conv(logic signed [AW-1:0] v, int sh);
    logic signed [CW-1:0] w;
    w = CW'(v);
    if (sh <= int'(F)) w = w <<< (int'(F) - sh);
    else               w = w >>> (sh - int'(F));
    return DW'(w);
  endfunction

  function automatic logic signed [DW-1:0] fmul(logic signed [DW-1:0] a, logic signed [DW-1:0] b);
    logic signed [2*DW-1:0] p;
    p = (2*DW)'(a) * (2*DW)'(b);
    return DW'(p >>> F);
  endfunction

  typedef enum logic [2:0] {S_IDLE, S_EDIV, S_EWAIT, S_ESUB, S_BSUM, S_BWAIT, S_DONE} st_t;
  st_t st;

  logic signed [DW-1:0] a [M][M+1];
  logic signed [DW-1:0] fac;
  logic [IW-1:0]        p, r;

  logic                 d_start, d_busy, d_done, d_zero;
  logic signed [NW-1:0] d_num, d_quo;
  logic signed [DW-1:0] d_den;

  seq_div #(.NW(NW), .DW(DW)) u_div (
    .clk, .rst_n, .start(d_start), .num(d_num), .den(d_den),
    .busy(d_busy), .done(d_done), .div_zero(d_zero), .quo(d_quo));

  // back substitution: right-hand side minus the known terms of row r
  logic signed [DW-1:0] bsum;
  always_comb begin
    bsum = a[r][M];
    for (int c = 0; c < M; c++)
      if (c > int'(r)) bsum = bsum - fmul(a[r][c], coef[c]);
  end

  always_comb begin
    d_start = 1'b0;
    d_num   = '0;
    d_den   = '0;
    if (st == S_EDIV && p != IW'(M - 1)) begin
      d_start = 1'b1;
      d_num   = NW'(a[r][p]) <<< F;
      d_den   = a[p][p];
    end else if (st == S_BSUM) begin
      d_start = 1'b1;
      d_num   = NW'(bsum) <<< F;
      d_den   = a[r][r];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; busy <= 1'b0; done <= 1'b0; err <= 1'b0;
      p <= '0; r <= '0; fac <= '0;
      for (int i = 0; i < M; i++) begin
        coef[i] <= '0;
        for (int j = 0; j <= M; j++) a[i][j] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          for (int i = 0; i < M; i++) begin
            for (int j = 0; j < M; j++) a[i][j] <= conv(sx[i+j], (i + j) * int'(XSH));
            a[i][M] <= conv(sxy[i], i * int'(XSH) + int'(YSH));
            coef[i] <= '0;
          end
          p <= '0; r <= IW'(1); busy <= 1'b1; err <= 1'b0;
          st <= S_EDIV;
        end
        S_EDIV: begin
          if (p == IW'(M - 1)) begin
            r  <= IW'(M - 1);
            st <= S_BSUM;
          end else st <= S_EWAIT;
        end
        S_EWAIT: if (d_done) begin
          if (d_zero) begin err <= 1'b1; st <= S_DONE; end
          else begin fac <= DW'(d_quo); st <= S_ESUB; end
        end
        S_ESUB: begin
          for (int c = 0; c <= M; c++)
            if (c == int'(p)) a[r][c] <= '0;
            else if (c > int'(p)) a[r][c] <= a[r][c] - fmul(fac, a[p][c]);
          if (r == IW'(M - 1)) begin
            p <= p + 1'b1;
            r <= (int'(p) + 2 < int'(M)) ? IW'(int'(p) + 2) : IW'(M - 1);
          end else r <= r + 1'b1;
          st <= S_EDIV;
        end
        S_BSUM: st <= S_BWAIT;
        S_BWAIT: if (d_done) begin
          if (d_zero) begin err <= 1'b1; st <= S_DONE; end
          else begin
            coef[r] <= DW'(d_quo);
            if (r == '0) st <= S_DONE;
            else begin r <= r - 1'b1; st <= S_BSUM; end
          end
        end
        S_DONE: begin busy <= 1'b0; done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

  // the shared divider is only started when it is free
  a_div_free: assert property (@(posedge clk) disable iff (!rst_n) d_start |-> !d_busy);
endmodule

// dual_update -- projected dual gradient step with Nesterov momentum, for one
// constraint per clock.
//
// For constraints A z <= b the dual variables mu are kept non-negative. With
// v_i = (A z)_i from the matrix-vector unit, the unit computes
//   g_i      = v_i - b_i                          (dual gradient)
//   mu+_i    = max(0, mu_hat_i + step * g_i)      (gradient step, projection)
//   mu_hat+_i = mu+_i + beta * (mu+_i - mu_i)     (momentum / extrapolation)
// where step = 1/L (L a Lipschitz constant of the dual gradient) and beta is
// the momentum coefficient of the current iteration. These are the vector
// additions, subtractions and min/max operations of the solver's inner loop.
//
// Pipeline: four register stages (S1 g; S2 mu+; S3 mu+ - mu; S4 mu_hat+), so
// out_valid/out_idx/mu_new/mu_hat_new follow in_valid by four clocks; a new
// element may enter every clock. mu, mu_hat and beta are sampled with v and
// b; step must be steady while elements are in flight. The equations are the
// standard dual fast gradient method; the stage split is this design's.
// The sign bit of mu_new is constant 0 by construction (mu+ >= 0 after the
// projection); synthesis reports it as a constant output, which is intended.
module dual_update
  import dfgm_pkg::*;
#(
  parameter int IDX_W = 7
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] in_idx,
  input  fp32_t            v,
  input  fp32_t            b,
  input  fp32_t            mu,
  input  fp32_t            mu_hat,
  input  fp32_t            step,
  input  fp32_t            beta,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_idx,
  output fp32_t            mu_new,
  output fp32_t            mu_hat_new
);

  typedef struct packed {
    logic [IDX_W-1:0] idx;
    fp32_t            mu;
    fp32_t            beta;
  } carry_t;

  logic   vld [4];
  carry_t c1, c2;
  logic [IDX_W-1:0] idx3;
  fp32_t  beta3;
  fp32_t  mu_hat1;
  fp32_t  g, g1;
  fp32_t  sg, t, mn2;
  fp32_t  d, d3, mn3;
  fp32_t  bd, mh;

  // S1: gradient
  fp32_add u_g (.a(v), .b(b), .sub(1'b1), .y(g));
  // S2: gradient step and projection
  fp32_mul u_sg (.a(step), .b(g1), .y(sg));
  fp32_add u_t  (.a(mu_hat1), .b(sg), .sub(1'b0), .y(t));
  // S3: dual difference
  fp32_add u_d  (.a(mn2), .b(c2.mu), .sub(1'b1), .y(d));
  // S4: extrapolation
  fp32_mul u_bd (.a(beta3), .b(d3), .y(bd));
  fp32_add u_mh (.a(mn3), .b(bd), .sub(1'b0), .y(mh));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) vld[i] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      for (int i = 1; i < 4; i++) vld[i] <= vld[i-1];
    end
  end

  always_ff @(posedge clk) begin
    // S1
    g1      <= g;
    mu_hat1 <= mu_hat;
    c1      <= '{idx: in_idx, mu: mu, beta: beta};
    // S2
    mn2     <= fp32_max0(t);
    c2      <= c1;
    // S3
    d3      <= d;
    mn3     <= mn2;
    idx3    <= c2.idx;
    beta3   <= c2.beta;
    // S4
    mu_new     <= mn3;
    mu_hat_new <= mh;
    out_idx    <= idx3;
  end

  assign out_valid = vld[3];

endmodule

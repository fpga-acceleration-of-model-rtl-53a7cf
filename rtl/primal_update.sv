// primal_update -- adds the constant term to the streamed primal product.
//
// In the dual fast gradient method the primal minimiser for the current
// dual estimate is an affine map of it, z = M_z mu_hat + q, with M_z and q
// prepared beforehand. The matrix-vector unit delivers (M_z mu_hat)_i one row
// per clock; this unit adds q_i and hands z_i on with its index.
//
// Interface: in_valid/in_idx/mv/q in, out_valid/out_idx/z out one clock
// later (one register stage, this design's choice). No back-pressure.
module primal_update
  import dfgm_pkg::*;
#(
  parameter int IDX_W = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] in_idx,
  input  fp32_t            mv,
  input  fp32_t            q,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_idx,
  output fp32_t            z
);

  fp32_t s;

  fp32_add u_add (.a(mv), .b(q), .sub(1'b0), .y(s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    out_idx <= in_idx;
    z       <= s;
  end

endmodule

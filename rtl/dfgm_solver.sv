// dfgm_solver -- quadratic-programming solver for model predictive control,
// dual fast gradient method (dFGM), single-precision floating point.
//
// Problem: minimise 1/2 z'Hz + f'z subject to A z <= b, with NZ decision
// variables and NC constraints. The solver iterates on the dual variables
// mu >= 0. With the precomputed map M_z = -H^-1 A' (NZ x NC) and offset
// q = -H^-1 f, one iteration k is
//   phase 1:  z       = M_z mu_hat + q                 (matvec_unit u_mvz +
//                                                       primal_update)
//   phase 2:  mu+     = max(0, mu_hat + step (A z - b))  (matvec_unit u_mva +
//            mu_hat+ = mu+ + beta_k (mu+ - mu)            dual_update lanes)
// and the solve runs a fixed N_ITER iterations, then returns z.
//
// Both matrix-vector products have their inner loop fully unrolled (one
// multiplier per column, column-partitioned matrix memory), their outer loop
// pipelined at one row per clock and a binary adder tree per row. The tall
// matrix A (NC rows, NC > NZ) is cut into SPLIT row blocks handled by SPLIT
// parallel lanes, each lane followed by its own dual_update pipeline. The
// vectors z, mu and mu_hat are kept in registers (fully partitioned) because
// a product needs all of its input vector every clock.
//
// Host interface: before a solve the host writes the problem through the
// load port, one 32-bit word per clock: ld_sel picks M_z, A, q, b, the
// momentum table beta[0..N_ITER-1] or the step 1/L; ld_row/ld_col give the
// position (ld_col only for matrices). A pulse on start runs prologue (duals
// cleared), the N_ITER iterations and the epilogue (z copied to z_out); done
// pulses for one clock when z_out is valid and cycles gives the solve time in
// clocks. Loading is not allowed while busy. One iteration takes
// (NZ + LAT(NC) + 4) + (NC/SPLIT + LAT(NZ) + 7) clocks, LAT(n) = ceil(log2 n)
// (112 clocks at the default sizes); a solve takes N_ITER times that plus 2.
//
// The algorithm class, the 500 iterations, single precision and the three
// matrix-vector optimisations follow the paper; the problem sizes, the load
// port and all latencies are this design's own choices.
module dfgm_solver
  import dfgm_pkg::*;
#(
  parameter int NZ     = 44,
  parameter int NC     = 88,
  parameter int SPLIT  = 2,
  parameter int N_ITER = 500,
  localparam int ZW    = (NZ > 1) ? $clog2(NZ) : 1,
  localparam int CWD   = (NC > 1) ? $clog2(NC) : 1,
  localparam int IW    = (N_ITER > 1) ? $clog2(N_ITER) : 1,
  localparam int RB    = NC / SPLIT
) (
  input  logic        clk,
  input  logic        rst_n,
  // problem load
  input  logic        ld_en,
  input  ld_sel_e     ld_sel,
  input  logic [15:0] ld_row,
  input  logic [15:0] ld_col,
  input  fp32_t       ld_data,
  // solve
  input  logic        start,
  output logic        busy,
  output logic        done,
  output fp32_t       z_out [NZ],
  output logic [31:0] cycles
);

  // ---------------------------------------------------------------- state
  fp32_t z      [NZ];
  fp32_t q      [NZ];
  fp32_t mu     [NC];
  fp32_t mu_hat [NC];
  fp32_t b      [NC];
  fp32_t beta_mem [N_ITER];
  fp32_t beta_cur;
  fp32_t step;

  // ---------------------------------------------------------------- control
  logic          clear_duals, mv1_start, mv2_start, latch_out;
  logic [IW-1:0] iter;
  logic          ph1_done, ph2_done;

  dfgm_ctrl #(.N_ITER(N_ITER)) u_ctrl (
    .clk, .rst_n, .start, .ph1_done, .ph2_done,
    .clear_duals, .mv1_start, .mv2_start, .latch_out,
    .iter, .busy, .done, .cycles
  );

  // ---------------------------------------------------------------- phase 1
  logic          mvz_busy, mvz_valid, mvz_done;
  logic [ZW-1:0] mvz_row [1];
  fp32_t         mvz_y   [1];
  logic          pu_valid;
  logic [ZW-1:0] pu_idx;
  fp32_t         pu_z;

  matvec_unit #(.ROWS(NZ), .COLS(NC), .SPLIT(1)) u_mvz (
    .clk, .rst_n,
    .we     (ld_en && ld_sel == LD_MZ),
    .wr_row (ld_row[ZW-1:0]),
    .wr_col (ld_col[CWD-1:0]),
    .wr_data(ld_data),
    .start  (mv1_start),
    .x      (mu_hat),
    .busy   (mvz_busy),
    .out_valid(mvz_valid),
    .out_row(mvz_row),
    .y      (mvz_y),
    .done   (mvz_done)
  );

  primal_update #(.IDX_W(ZW)) u_pu (
    .clk, .rst_n,
    .in_valid (mvz_valid),
    .in_idx   (mvz_row[0]),
    .mv       (mvz_y[0]),
    .q        (q[mvz_row[0]]),
    .out_valid(pu_valid),
    .out_idx  (pu_idx),
    .z        (pu_z)
  );

  assign ph1_done = pu_valid && (pu_idx == ZW'(NZ - 1));

  // ---------------------------------------------------------------- phase 2
  logic           mva_busy, mva_valid, mva_done;
  logic [CWD-1:0] mva_row [SPLIT];
  fp32_t          mva_y   [SPLIT];
  logic           du_valid   [SPLIT];
  logic [CWD-1:0] du_idx     [SPLIT];
  fp32_t          du_mu      [SPLIT];
  fp32_t          du_mu_hat  [SPLIT];

  matvec_unit #(.ROWS(NC), .COLS(NZ), .SPLIT(SPLIT)) u_mva (
    .clk, .rst_n,
    .we     (ld_en && ld_sel == LD_A),
    .wr_row (ld_row[CWD-1:0]),
    .wr_col (ld_col[ZW-1:0]),
    .wr_data(ld_data),
    .start  (mv2_start),
    .x      (z),
    .busy   (mva_busy),
    .out_valid(mva_valid),
    .out_row(mva_row),
    .y      (mva_y),
    .done   (mva_done)
  );

  for (genvar l = 0; l < SPLIT; l++) begin : g_du
    dual_update #(.IDX_W(CWD)) u_du (
      .clk, .rst_n,
      .in_valid  (mva_valid),
      .in_idx    (mva_row[l]),
      .v         (mva_y[l]),
      .b         (b[mva_row[l]]),
      .mu        (mu[mva_row[l]]),
      .mu_hat    (mu_hat[mva_row[l]]),
      .step      (step),
      .beta      (beta_cur),
      .out_valid (du_valid[l]),
      .out_idx   (du_idx[l]),
      .mu_new    (du_mu[l]),
      .mu_hat_new(du_mu_hat[l])
    );
  end

  assign ph2_done = du_valid[0] && (du_idx[0] == CWD'(RB - 1));

  // ---------------------------------------------------------------- vectors
  always_ff @(posedge clk) begin
    // problem data
    if (ld_en) begin
      unique case (ld_sel)
        LD_Q:    q[ld_row[ZW-1:0]]         <= ld_data;
        LD_B:    b[ld_row[CWD-1:0]]        <= ld_data;
        LD_BETA: beta_mem[ld_row[IW-1:0]]  <= ld_data;
        LD_STEP: step                      <= ld_data;
        default: ;
      endcase
    end
    beta_cur <= beta_mem[iter];

    // primal vector
    if (pu_valid) z[pu_idx] <= pu_z;

    // dual vectors
    if (clear_duals) begin
      for (int i = 0; i < NC; i++) begin
        mu[i]     <= FP32_ZERO;
        mu_hat[i] <= FP32_ZERO;
      end
    end else begin
      for (int l = 0; l < SPLIT; l++) begin
        if (du_valid[l]) begin
          mu[du_idx[l]]     <= du_mu[l];
          mu_hat[du_idx[l]] <= du_mu_hat[l];
        end
      end
    end

    // epilogue
    if (latch_out) z_out <= z;
  end

  // ---------------------------------------------------------------- checks
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n) ld_en |-> !busy)
    else $error("dfgm_solver: problem data written during a solve");
  a_phase1_order: assert property (@(posedge clk) disable iff (!rst_n) mvz_done |-> !mva_busy)
    else $error("dfgm_solver: phases overlap");
  a_phase2_order: assert property (@(posedge clk) disable iff (!rst_n) mva_done |-> !mvz_busy)
    else $error("dfgm_solver: phases overlap");

  initial begin
    assert (NC % SPLIT == 0) else $fatal(1, "dfgm_solver: NC must be a multiple of SPLIT");
  end

endmodule

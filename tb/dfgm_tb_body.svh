// dfgm_tb_body.svh -- shared body of the solver testbenches. The including
// module defines NZ, NC, SPLIT, N_ITER, N_SOLVES and instantiates the solver
// as "dut" on the signals declared here (before the include).
//
// The test builds a random strictly convex QP
//   min 1/2 z'Hz + f'z  s.t.  A z <= b,   H = diag(h), h_i in [1,3],
// A_ij in [-1,1], b_i in [0.2,1] (so z = 0 is feasible) and f large enough
// that the unconstrained minimiser violates constraints. It derives the
// solver data M_z = -H^-1 A', q = -H^-1 f, step = 1/L with L the largest
// eigenvalue of A H^-1 A' (power iteration, +2 %), and the Nesterov
// momentum table beta_k = (t_k - 1)/t_{k+1}, t_0 = 1,
// t_{k+1} = (1 + sqrt(1 + 4 t_k^2))/2. It loads everything through the load
// port, runs N_SOLVES solves with different f, and checks:
//   * z_out bit for bit against a reference dFGM that uses the same operation
//     order (fp_ref_pkg), so every pipeline, tree, lane and the projection
//     must be exact;
//   * the clocks per iteration against the documented formula, and the
//     number of iterations against N_ITER;
//   * that the result is a near-feasible point (max violation of A z <= b);
//   * that every mechanism occurred: both the projection clamping (mu+ = 0)
//     and passing, every row-block lane delivering results, momentum with
//     beta != 0, and the prologue clearing the duals between solves.

localparam int LATC  = $clog2(NC);
localparam int LATZ  = $clog2(NZ);
localparam int T_ITER = (NZ + LATC + 4) + (NC / SPLIT + LATZ + 7);

logic [31:0] Mz [NZ][NC];
logic [31:0] Am [NC][NZ];
logic [31:0] qv [NZ];
logic [31:0] bv [NC];
logic [31:0] betav [N_ITER];
logic [31:0] stepv;
real         hdiag [NZ];

int checks = 0, failures = 0, cyc = 0;
int n_clamp = 0, n_pass = 0, n_mv1 = 0, n_beta_nz = 0, n_clear = 0;
int lane_hits [SPLIT];
int last_mv1 = -1;

always #5 clk = ~clk;
always @(posedge clk) cyc <= cyc + 1;

task automatic fail(string msg);
  failures++;
  if (failures < 20) $display("FAIL %s", msg);
endtask

// ---------------------------------------------------------- event counters
always @(posedge clk) if (rst_n) begin
  if (dut.mv1_start) begin
    n_mv1++;
    if (last_mv1 >= 0 && dut.u_ctrl.iter != 0) begin
      checks++;
      if (cyc - last_mv1 != T_ITER)
        fail($sformatf("iteration took %0d clocks, expected %0d", cyc - last_mv1, T_ITER));
    end
    last_mv1 = cyc;
  end
  if (dut.clear_duals) n_clear++;
  if (dut.mva_valid && dut.beta_cur != 0) n_beta_nz++;
  for (int l = 0; l < SPLIT; l++) if (dut.du_valid[l]) lane_hits[l]++;
end

for (genvar l = 0; l < SPLIT; l++) begin : g_mon
  always @(posedge clk) if (rst_n && dut.g_du[l].u_du.vld[0]) begin
    if (dut.g_du[l].u_du.t[31]) n_clamp++;
    else                        n_pass++;
  end
end

initial begin
  repeat (N_SOLVES * (N_ITER * T_ITER + 100) + 20 * NZ * NC + 1000) @(posedge clk);
  failures++;
  $display("watchdog expired");
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

// ---------------------------------------------------------- helpers
task automatic load(ld_sel_e sel, int row, int col, logic [31:0] data);
  @(negedge clk);
  ld_en = 1; ld_sel = sel; ld_row = 16'(row); ld_col = 16'(col); ld_data = data;
endtask

function automatic real urand(real lo, real hi);
  return lo + (hi - lo) * real'($urandom_range(1000000, 0)) / 1000000.0;
endfunction

// Reference dFGM, same operation order as the RTL.
task automatic ref_solve(output logic [31:0] zr [NZ]);
  logic [31:0] mu [NC], mh [NC], v, g, t, mn, d;
  logic [31:0] pq[$];
  for (int i = 0; i < NC; i++) begin mu[i] = 0; mh[i] = 0; end
  for (int k = 0; k < N_ITER; k++) begin
    for (int i = 0; i < NZ; i++) begin
      pq = {};
      for (int j = 0; j < NC; j++) pq.push_back(ref_mul(Mz[i][j], mh[j]));
      zr[i] = ref_add(ref_tree(pq), qv[i]);
    end
    for (int i = 0; i < NC; i++) begin
      pq = {};
      for (int j = 0; j < NZ; j++) pq.push_back(ref_mul(Am[i][j], zr[j]));
      v  = ref_tree(pq);
      g  = ref_sub(v, bv[i]);
      t  = ref_add(mh[i], ref_mul(stepv, g));
      mn = ref_max0(t);
      d  = ref_sub(mn, mu[i]);
      mh[i] = ref_add(mn, ref_mul(betav[k], d));
      mu[i] = mn;
    end
  end
endtask

// ---------------------------------------------------------- stimulus
initial begin
  real P [NC][NC];
  real w [NC], w2 [NC], nrm, lmax, tk, tk1;
  logic [31:0] zr [NZ];
  real viol, ax, bmax;
  int t0;

  for (int l = 0; l < SPLIT; l++) lane_hits[l] = 0;
  ld_en = 0; ld_sel = LD_MZ; ld_row = 0; ld_col = 0; ld_data = 0; start = 0;
  repeat (3) @(posedge clk);
  rst_n = 1;

  // problem matrices
  for (int i = 0; i < NZ; i++) hdiag[i] = urand(1.0, 3.0);
  for (int i = 0; i < NC; i++) begin
    for (int j = 0; j < NZ; j++) Am[i][j] = real2fp(urand(-1.0, 1.0));
    bv[i] = real2fp(urand(0.2, 1.0));
  end
  for (int i = 0; i < NZ; i++)
    for (int j = 0; j < NC; j++) Mz[i][j] = real2fp(-fp2real(Am[j][i]) / hdiag[i]);
  // L = lambda_max(A H^-1 A')
  for (int i = 0; i < NC; i++)
    for (int j = 0; j < NC; j++) begin
      P[i][j] = 0.0;
      for (int k = 0; k < NZ; k++) P[i][j] += fp2real(Am[i][k]) * fp2real(Am[j][k]) / hdiag[k];
    end
  for (int i = 0; i < NC; i++) w[i] = 1.0;
  lmax = 1.0;
  for (int it = 0; it < 200; it++) begin
    nrm = 0.0;
    for (int i = 0; i < NC; i++) begin
      w2[i] = 0.0;
      for (int j = 0; j < NC; j++) w2[i] += P[i][j] * w[j];
      nrm += w2[i] * w2[i];
    end
    nrm = $sqrt(nrm);
    lmax = nrm;
    for (int i = 0; i < NC; i++) w[i] = w2[i] / nrm;
  end
  stepv = real2fp(1.0 / (1.02 * lmax));
  tk = 1.0;
  for (int k = 0; k < N_ITER; k++) begin
    tk1 = (1.0 + $sqrt(1.0 + 4.0 * tk * tk)) / 2.0;
    betav[k] = real2fp((tk - 1.0) / tk1);
    tk = tk1;
  end

  for (int i = 0; i < NZ; i++)
    for (int j = 0; j < NC; j++) load(LD_MZ, i, j, Mz[i][j]);
  for (int i = 0; i < NC; i++)
    for (int j = 0; j < NZ; j++) load(LD_A, i, j, Am[i][j]);
  for (int i = 0; i < NC; i++) load(LD_B, i, 0, bv[i]);
  for (int k = 0; k < N_ITER; k++) load(LD_BETA, k, 0, betav[k]);
  load(LD_STEP, 0, 0, stepv);

  for (int s = 0; s < N_SOLVES; s++) begin
    for (int i = 0; i < NZ; i++) begin
      qv[i] = real2fp(-urand(-6.0, 6.0) / hdiag[i]);
      load(LD_Q, i, 0, qv[i]);
    end
    @(negedge clk) ld_en = 0;
    ref_solve(zr);
    start = 1;
    t0 = cyc;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int i = 0; i < NZ; i++) begin
      checks++;
      if (z_out[i] !== zr[i]) fail($sformatf("solve %0d z[%0d] = %h, expected %h", s, i, z_out[i], zr[i]));
    end
    checks++;
    if (cycles != N_ITER * T_ITER + 2)
      fail($sformatf("solve took %0d clocks, expected %0d", cycles, N_ITER * T_ITER + 2));
    // feasibility of the returned point
    viol = 0.0; bmax = 0.0;
    for (int i = 0; i < NC; i++) begin
      ax = 0.0;
      for (int j = 0; j < NZ; j++) ax += fp2real(Am[i][j]) * fp2real(z_out[j]);
      if (ax - fp2real(bv[i]) > viol) viol = ax - fp2real(bv[i]);
      if (fp2real(bv[i]) > bmax) bmax = fp2real(bv[i]);
    end
    $display("solve %0d: %0d clocks, %0d per iteration, max violation %g", s, cycles, T_ITER, viol);
    checks++;
    if (viol > VIOL_TOL * bmax) fail($sformatf("constraint violation %g too large", viol));
  end

  // mechanisms
  checks++; if (n_clamp == 0)   fail("projection never clamped");
  checks++; if (n_pass == 0)    fail("projection never passed a value");
  checks++; if (n_beta_nz == 0) fail("momentum never used");
  checks++; if (n_mv1 != N_SOLVES * N_ITER) fail($sformatf("%0d iterations run", n_mv1));
  checks++; if (n_clear != N_SOLVES) fail("prologue count");
  for (int l = 0; l < SPLIT; l++) begin
    checks++;
    if (lane_hits[l] != N_SOLVES * N_ITER * (NC / SPLIT)) fail($sformatf("lane %0d delivered %0d", l, lane_hits[l]));
  end
  $display("events: clamp=%0d pass=%0d momentum=%0d iterations=%0d prologues=%0d lane0=%0d",
           n_clamp, n_pass, n_beta_nz, n_mv1, n_clear, lane_hits[0]);
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

// tb_dual_update -- self-checking test of the dual update pipeline. Random
// elements enter on most clocks with a per-element momentum coefficient;
// each output (mu+, mu_hat+, index) is compared with the reference
// equations and must appear four clocks after its input. The test counts
// how often the projection clamps and how often it passes, and fails if
// either never happened.
module tb_dual_update;
  import fp_ref_pkg::*;

  localparam int LAT = 4;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, out_valid;
  logic [6:0]  in_idx = 0, out_idx;
  logic [31:0] v = 0, b = 0, mu = 0, mu_hat = 0, step = 0, beta = 0;
  logic [31:0] mu_new, mu_hat_new;
  logic [31:0] e_mu [128], e_mh [128];
  int          e_cyc [128];
  int          checks = 0, failures = 0, cyc = 0, n_clamp = 0, n_pass = 0;

  dual_update #(.IDX_W(7)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (mu_new !== e_mu[out_idx] || mu_hat_new !== e_mh[out_idx] || cyc - e_cyc[out_idx] != LAT) begin
      failures++;
      $display("FAIL idx=%0d mu=%h/%h mu_hat=%h/%h lat=%0d", out_idx, mu_new, e_mu[out_idx],
               mu_hat_new, e_mh[out_idx], cyc - e_cyc[out_idx]);
    end
  end

  initial begin
    logic [31:0] t, mn;
    step = 32'h3E00_0000;  // 0.125
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 600; k++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3, 0) != 0);
      if (in_valid) begin
        in_idx = 7'(k);
        v      = rand_fp(3);
        b      = {1'b0, rand_fp(2)};
        mu     = ($urandom_range(3, 0) == 0) ? 32'd0 : {1'b0, rand_fp(3)};
        mu_hat = {1'($urandom_range(3, 0) == 0), rand_fp(3)};
        beta   = real2fp(real'($urandom_range(999, 0)) / 1000.0);
        t  = ref_add(mu_hat, ref_mul(step, ref_sub(v, b)));
        mn = ref_max0(t);
        if (t[31]) n_clamp++; else n_pass++;
        e_mu[in_idx] = mn;
        e_mh[in_idx] = ref_add(mn, ref_mul(beta, ref_sub(mn, mu)));
        e_cyc[in_idx] = cyc;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (n_clamp == 0 || n_pass == 0) begin
      failures++;
      $display("FAIL projection cases clamp=%0d pass=%0d", n_clamp, n_pass);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

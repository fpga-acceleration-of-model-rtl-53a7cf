// tb_primal_update -- self-checking test of the primal offset stage: random
// streams of (index, product, offset) with gaps; each output must equal the
// reference sum, carry the right index and arrive exactly one clock later.
module tb_primal_update;
  import fp_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, out_valid;
  logic [5:0]  in_idx = 0, out_idx;
  logic [31:0] mv = 0, q = 0, z;
  logic [31:0] exp_z;
  logic [5:0]  exp_idx;
  logic        exp_valid = 0;
  int          checks = 0, failures = 0;

  primal_update #(.IDX_W(6)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      // output of the previous clock's input
      checks++;
      if (out_valid !== exp_valid || (exp_valid && (z !== exp_z || out_idx !== exp_idx))) begin
        failures++;
        $display("FAIL t=%0d valid=%0d/%0d z=%h/%h idx=%0d/%0d", t, out_valid, exp_valid, z, exp_z, out_idx, exp_idx);
      end
      in_valid = ($urandom_range(4, 0) != 0);
      in_idx   = 6'($urandom);
      mv       = rand_fp(8);
      q        = rand_fp(8);
      exp_valid = in_valid;
      exp_z     = ref_add(mv, q);
      exp_idx   = in_idx;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

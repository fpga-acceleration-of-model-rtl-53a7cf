// tb_dfgm_ctrl -- self-checking test of the solve sequencer. A small model
// of the datapath answers each phase start with a phase-done pulse after a
// random delay. The test checks the order prologue, (phase 1, phase 2) x
// N_ITER, epilogue; the iteration index seen in each phase 2; that
// clear_duals and done/latch_out pulse once per solve; that start is
// ignored while busy; and that cycles equals the measured solve time.
module tb_dfgm_ctrl;
  localparam int N_ITER = 7;

  logic       clk = 0, rst_n = 0;
  logic       start = 0, ph1_done = 0, ph2_done = 0;
  logic       clear_duals, mv1_start, mv2_start, latch_out, busy, done;
  logic [2:0] iter;
  logic [31:0] cycles;
  int checks = 0, failures = 0, cyc = 0;
  int n_mv1 = 0, n_mv2 = 0, n_clear = 0, n_done = 0, expect_phase = 0;
  int t_start, t_done;

  dfgm_ctrl #(.N_ITER(N_ITER)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string s);
    failures++;
    $display("FAIL %s", s);
  endtask

  // datapath model
  always @(posedge clk) if (rst_n) begin
    if (clear_duals) n_clear++;
    if (done) begin n_done++; t_done = cyc; end
    if (mv1_start) begin
      checks++;
      if (expect_phase != 1) fail("phase 1 out of order");
      n_mv1++;
      expect_phase = 2;
      fork begin
        repeat ($urandom_range(6, 1)) @(posedge clk);
        ph1_done <= 1; @(posedge clk) ph1_done <= 0;
      end join_none
    end
    if (mv2_start) begin
      checks++;
      if (expect_phase != 2) fail("phase 2 out of order");
      checks++;
      if (int'(iter) != n_mv2) fail($sformatf("iter %0d in phase 2 number %0d", iter, n_mv2));
      n_mv2++;
      expect_phase = 1;
      fork begin
        repeat ($urandom_range(6, 1)) @(posedge clk);
        ph2_done <= 1; @(posedge clk) ph2_done <= 0;
      end join_none
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 3; s++) begin
      n_mv1 = 0; n_mv2 = 0; n_clear = 0; n_done = 0; expect_phase = 1;
      @(negedge clk) start = 1;
      t_start = cyc;
      @(negedge clk) start = 0;
      // a second start while busy must be ignored
      repeat (3) @(negedge clk);
      start = 1;
      @(negedge clk) start = 0;
      while (busy) @(negedge clk);
      checks++; if (n_mv1 != N_ITER) fail($sformatf("%0d phase-1 starts", n_mv1));
      checks++; if (n_mv2 != N_ITER) fail($sformatf("%0d phase-2 starts", n_mv2));
      checks++; if (n_clear != 1)    fail("prologue count");
      checks++; if (n_done != 1)     fail("epilogue count");
      checks++; if (cycles != 32'(t_done - t_start)) fail($sformatf("cycles %0d measured %0d", cycles, t_done - t_start));
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

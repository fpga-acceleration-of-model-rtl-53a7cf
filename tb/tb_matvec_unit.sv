// tb_matvec_unit -- self-checking test of the pipelined matrix-vector unit.
// A 12 x 7 matrix split into SPLIT = 3 row blocks is loaded with random
// values and multiplied by several random vectors, back to back. Each row
// result is compared with a reference that forms the products and sums them
// in the adder tree's pairwise order; every row must arrive exactly once,
// and start-to-done must take RB + 1 + ceil(log2 COLS) = 4 + 1 + 3 clocks.
module tb_matvec_unit;
  import fp_ref_pkg::*;

  localparam int ROWS = 12, COLS = 7, SPLIT = 3, RB = ROWS / SPLIT;
  localparam int EXP_LAT = RB + 1 + 3;

  logic        clk = 0, rst_n = 0;
  logic        we = 0;
  logic [3:0]  wr_row = 0;
  logic [2:0]  wr_col = 0;
  logic [31:0] wr_data = 0;
  logic        start = 0;
  logic [31:0] x [COLS];
  logic        busy, out_valid, done;
  logic [3:0]  out_row [SPLIT];
  logic [31:0] y [SPLIT];

  logic [31:0] m [ROWS][COLS];
  logic [31:0] exp_y [ROWS];
  int          seen [ROWS];
  int          checks = 0, failures = 0, cyc = 0, t_start;

  matvec_unit #(.ROWS(ROWS), .COLS(COLS), .SPLIT(SPLIT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int l = 0; l < SPLIT; l++) begin
      checks++;
      seen[out_row[l]]++;
      if (y[l] !== exp_y[out_row[l]]) begin
        failures++;
        $display("FAIL row %0d got %h exp %h", out_row[l], y[l], exp_y[out_row[l]]);
      end
    end
  end

  initial begin
    logic [31:0] q[$];
    for (int c = 0; c < COLS; c++) x[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        we = 1; wr_row = 4'(r); wr_col = 3'(c); wr_data = rand_fp(5);
        m[r][c] = wr_data;
      end
    @(negedge clk) we = 0;
    for (int v = 0; v < 6; v++) begin
      for (int c = 0; c < COLS; c++) x[c] = rand_fp(5);
      for (int r = 0; r < ROWS; r++) begin
        q = {};
        for (int c = 0; c < COLS; c++) q.push_back(ref_mul(m[r][c], x[c]));
        exp_y[r] = ref_tree(q);
        seen[r] = 0;
      end
      @(negedge clk) start = 1;
      t_start = cyc + 1;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t_start != EXP_LAT) begin
        failures++;
        $display("FAIL latency %0d expected %0d", cyc - t_start, EXP_LAT);
      end
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (seen[r] != 1) begin
          failures++;
          $display("FAIL row %0d delivered %0d times", r, seen[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

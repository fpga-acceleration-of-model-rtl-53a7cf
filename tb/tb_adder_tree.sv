// tb_adder_tree -- self-checking test of the pipelined binary adder tree.
// A 13-input tree (odd level sizes) is fed a new random vector on most
// clocks; every result is compared with a reference that sums the same
// vector in the same pairwise order, the tag is checked to travel with the
// sum, and the latency must be ceil(log2 13) = 4 clocks.
module tb_adder_tree;
  import fp_ref_pkg::*;

  localparam int N = 13;
  localparam int LAT = 4;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0;
  logic [7:0]  in_tag = 0;
  logic [31:0] x [N];
  logic        out_valid;
  logic [7:0]  out_tag;
  logic [31:0] sum;
  int          checks = 0, failures = 0, cyc = 0;

  logic [31:0] exp_sum [256];
  int          sent_cyc [256];

  adder_tree #(.N(N), .TAG_W(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Checker
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (sum !== exp_sum[out_tag] || (cyc - sent_cyc[out_tag]) != LAT) begin
      failures++;
      $display("FAIL tag=%0d sum=%h exp=%h latency=%0d", out_tag, sum, exp_sum[out_tag],
               cyc - sent_cyc[out_tag]);
    end
  end

  initial begin
    logic [31:0] q[$];
    for (int k = 0; k < N; k++) x[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3, 0) != 0);
      if (in_valid) begin
        q = {};
        for (int k = 0; k < N; k++) begin
          x[k] = rand_fp(6);
          q.push_back(x[k]);
        end
        in_tag = 8'(t);
        exp_sum[t] = ref_tree(q);
        sent_cyc[t] = cyc;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    if (checks < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// adder_tree -- pipelined binary-tree summation of N single-precision values.
//
// This is the row-sum of the matrix-vector product: instead of accumulating a
// row's products one after the other (a loop-carried chain of adders), the N
// products are added pairwise, level by level, so a row sum takes
// ceil(log2 N) adder delays and a new row can enter every clock. Level l holds
// ceil(N / 2^l) values; element k of level l+1 is element 2k plus element 2k+1
// of level l, and an element without a partner is carried to the next level
// unchanged. The summation order is therefore fixed: a reference model must
// use the same pairing to reproduce the result bit for bit.
//
// Interface: in_valid/in_tag/x enter together; out_valid/out_tag/sum leave
// together LAT = ceil(log2 N) clocks later (one register per level). No
// back-pressure: the consumer must take one result per clock.
// The pairwise tree follows the paper; the register per level is this
// design's choice. N must be at least 2.
module adder_tree
  import dfgm_pkg::*;
#(
  parameter int N     = 88,
  parameter int TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  fp32_t            x [N],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output fp32_t            sum
);

  localparam int LAT = $clog2(N);

  // lvl[l][k]: element k of level l (level 0 is the input).
  fp32_t            lvl   [LAT+1][N];
  logic             vld   [LAT+1];
  logic [TAG_W-1:0] tag   [LAT+1];

  always_comb begin
    for (int k = 0; k < N; k++) lvl[0][k] = x[k];
    vld[0] = in_valid;
    tag[0] = in_tag;
  end

  for (genvar l = 0; l < LAT; l++) begin : g_level
    localparam int NIN  = (N + (1 << l) - 1) >> l;
    localparam int NOUT = (NIN + 1) / 2;
    for (genvar k = 0; k < N; k++) begin : g_node
      if (k < NOUT && 2 * k + 1 < NIN) begin : g_add
        fp32_t s;
        fp32_add u_add (.a(lvl[l][2*k]), .b(lvl[l][2*k+1]), .sub(1'b0), .y(s));
        always_ff @(posedge clk) lvl[l+1][k] <= s;
      end else if (k < NOUT) begin : g_pass
        always_ff @(posedge clk) lvl[l+1][k] <= lvl[l][2*k];
      end else begin : g_unused
        assign lvl[l+1][k] = FP32_ZERO;
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[l+1] <= 1'b0;
      else        vld[l+1] <= vld[l];
    end
    always_ff @(posedge clk) tag[l+1] <= tag[l];
  end

  assign out_valid = vld[LAT];
  assign out_tag   = tag[LAT];
  assign sum       = lvl[LAT][0];

endmodule

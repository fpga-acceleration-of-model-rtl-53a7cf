// matvec_unit -- pipelined matrix-vector product y = M x in single precision.
//
// The structure follows the three optimisations the solver relies on:
//   * the inner (column) loop is fully unrolled: COLS multipliers form all
//     products of one row in parallel, fed by a column-partitioned memory;
//   * the outer (row) loop is pipelined: a new row enters every clock;
//   * each row's products are summed by a binary adder tree (adder_tree);
//   * a tall matrix is cut into SPLIT stacked blocks of RB = ROWS/SPLIT rows.
//     Every block has its own memory bank, multipliers and tree, and all
//     blocks run side by side, so the product takes RB rows' time instead of
//     ROWS.
//
// Pipeline (per lane): row address -> registered memory read -> registered
// products -> LAT = ceil(log2 COLS) tree levels. With start sampled at clock
// edge 0, rows are read at edges 1..RB, the first results appear after edge
// 2+LAT and done is high in the cycle after edge RB+1+LAT, together with the
// last results. Lane l delivers global rows l*RB .. l*RB+RB-1 in order, all
// lanes in step; out_row gives each lane's row index.
//
// The vector x must stay unchanged from start until done. start is ignored
// while busy (an assertion flags it). Matrix elements are written one per
// clock through we/wr_row/wr_col/wr_data with the global row index; writing
// during a product is not allowed. Lane mapping, latencies and the load port
// are this design's own choices.
module matvec_unit
  import dfgm_pkg::*;
#(
  parameter int ROWS  = 44,
  parameter int COLS  = 88,
  parameter int SPLIT = 1,
  localparam int RB   = ROWS / SPLIT,
  localparam int RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int CW   = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int BW   = (RB > 1) ? $clog2(RB) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // matrix load
  input  logic          we,
  input  logic [RW-1:0] wr_row,
  input  logic [CW-1:0] wr_col,
  input  fp32_t         wr_data,
  // product
  input  logic          start,
  input  fp32_t         x [COLS],
  output logic          busy,
  output logic          out_valid,
  output logic [RW-1:0] out_row [SPLIT],
  output fp32_t         y [SPLIT],
  output logic          done
);

  logic [BW-1:0] cnt;
  logic          issue;
  logic          v1, v2;
  logic [BW-1:0] r1, r2;

  // Row sequencer: issues RB row addresses, one per clock.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue <= 1'b0;
      cnt   <= '0;
    end else if (start && !issue) begin
      issue <= 1'b1;
      cnt   <= '0;
    end else if (issue) begin
      if (cnt == BW'(RB - 1)) issue <= 1'b0;
      cnt <= cnt + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
    end else begin
      v1 <= issue;
      v2 <= v1;
    end
  end

  always_ff @(posedge clk) begin
    r1 <= cnt;
    r2 <= r1;
  end

  logic          lane_valid [SPLIT];
  logic [BW-1:0] lane_tag   [SPLIT];

  for (genvar l = 0; l < SPLIT; l++) begin : g_lane
    fp32_t         row_data [COLS];
    fp32_t         prod     [COLS];
    fp32_t         prod_q   [COLS];
    logic          bank_we;
    logic [RW-1:0] local_row;

    assign bank_we   = we && (int'(wr_row) >= l * RB) && (int'(wr_row) < (l + 1) * RB);
    assign local_row = wr_row - RW'(l * RB);

    matrix_ram #(.ROWS(RB), .COLS(COLS)) u_bank (
      .clk    (clk),
      .we     (bank_we),
      .wr_row (local_row[BW-1:0]),
      .wr_col (wr_col),
      .wr_data(wr_data),
      .rd_row (cnt),
      .rd_data(row_data)
    );

    for (genvar k = 0; k < COLS; k++) begin : g_mul
      fp32_mul u_mul (.a(row_data[k]), .b(x[k]), .y(prod[k]));
    end

    always_ff @(posedge clk) prod_q <= prod;

    adder_tree #(.N(COLS), .TAG_W(BW)) u_tree (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (v2),
      .in_tag   (r2),
      .x        (prod_q),
      .out_valid(lane_valid[l]),
      .out_tag  (lane_tag[l]),
      .sum      (y[l])
    );

    assign out_row[l] = RW'(l * RB) + RW'(lane_tag[l]);
  end

  assign out_valid = lane_valid[0];
  assign done      = lane_valid[0] && (lane_tag[0] == BW'(RB - 1));
  assign busy      = issue || v1 || v2 || lane_valid[0];

  // Protocol rules.
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !issue)
    else $error("matvec_unit: start while a product is running");
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n) we |-> !issue)
    else $error("matvec_unit: matrix written during a product");

  initial begin
    assert (ROWS % SPLIT == 0) else $fatal(1, "matvec_unit: ROWS must be a multiple of SPLIT");
  end

endmodule

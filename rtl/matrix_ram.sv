// matrix_ram -- one bank of matrix storage, partitioned by column.
//
// Holds a ROWS x COLS block of single-precision words. The storage is split
// into COLS independent columns, so that a complete row -- one operand for
// every multiplier of the unrolled inner loop -- is read in a single clock.
// (On an FPGA each column becomes its own narrow memory; here it is written
// as one array with a full-row read port.)
//
// Interface: write one element per clock (we, wr_row, wr_col, wr_data);
// read a whole row: rd_data shows row rd_row one clock after rd_row is
// presented (registered read, as in block RAM). Contents are not reset.
// Partitioning the matrix follows the paper; the column-wise split, the
// element write port and the registered read are this design's choices.
module matrix_ram
  import dfgm_pkg::*;
#(
  parameter int ROWS = 44,
  parameter int COLS = 88,
  localparam int RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int CW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [RW-1:0] wr_row,
  input  logic [CW-1:0] wr_col,
  input  fp32_t         wr_data,
  input  logic [RW-1:0] rd_row,
  output fp32_t         rd_data [COLS]
);

  fp32_t mem [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (we) mem[wr_row][wr_col] <= wr_data;
    rd_data <= mem[rd_row];
  end

endmodule

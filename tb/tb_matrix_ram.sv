// tb_matrix_ram -- self-checking test of the column-partitioned matrix bank:
// fills a 7 x 5 bank with random words, then reads rows in random order and
// checks that each full row appears exactly one clock after its address,
// then overwrites single elements and checks that only they change.
module tb_matrix_ram;
  localparam int ROWS = 7, COLS = 5;

  logic        clk = 0;
  logic        we = 0;
  logic [2:0]  wr_row = 0, rd_row = 0;
  logic [2:0]  wr_col = 0;
  logic [31:0] wr_data = 0;
  logic [31:0] rd_data [COLS];
  logic [31:0] model [ROWS][COLS];
  int          checks = 0, failures = 0;

  matrix_ram #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(int r);
    @(negedge clk) rd_row = 3'(r);
    @(negedge clk);
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (rd_data[c] !== model[r][c]) begin
        failures++;
        $display("FAIL row %0d col %0d got %h exp %h", r, c, rd_data[c], model[r][c]);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        we = 1; wr_row = 3'(r); wr_col = 3'(c); wr_data = $urandom;
        model[r][c] = wr_data;
      end
    @(negedge clk) we = 0;
    for (int i = 0; i < 30; i++) read_check($urandom_range(ROWS - 1, 0));
    for (int i = 0; i < 10; i++) begin
      @(negedge clk);
      we = 1; wr_row = 3'($urandom_range(ROWS - 1, 0)); wr_col = 3'($urandom_range(COLS - 1, 0));
      wr_data = $urandom;
      model[wr_row][wr_col] = wr_data;
      @(negedge clk) we = 0;
      for (int r = 0; r < ROWS; r++) read_check(r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

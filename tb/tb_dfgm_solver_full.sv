// tb_dfgm_solver_full -- one complete solve of the solver at its default
// sizes (44 variables, 88 constraints, 2 row-block lanes, 500 iterations).
// See dfgm_tb_body.svh for the problem, the reference model and the checks.
module tb_dfgm_solver_full;
  import dfgm_pkg::*;
  import fp_ref_pkg::*;

  localparam int  NZ = 44, NC = 88, SPLIT = 2, N_ITER = 500, N_SOLVES = 1;
  localparam real VIOL_TOL = 0.02;

  logic        clk = 0, rst_n = 0;
  logic        ld_en, start, busy, done;
  ld_sel_e     ld_sel;
  logic [15:0] ld_row, ld_col;
  logic [31:0] ld_data;
  logic [31:0] z_out [NZ];
  logic [31:0] cycles;

  dfgm_solver dut (.*);

`include "dfgm_tb_body.svh"
endmodule

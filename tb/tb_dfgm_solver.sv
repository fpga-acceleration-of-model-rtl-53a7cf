// tb_dfgm_solver -- end-to-end test of the solver at reduced size
// (NZ = 8, NC = 16, SPLIT = 2, 60 iterations, three solves). See
// dfgm_tb_body.svh for the problem, the reference model and the checks.
module tb_dfgm_solver;
  import dfgm_pkg::*;
  import fp_ref_pkg::*;

  localparam int  NZ = 8, NC = 16, SPLIT = 2, N_ITER = 60, N_SOLVES = 3;
  localparam real VIOL_TOL = 0.2;

  logic        clk = 0, rst_n = 0;
  logic        ld_en, start, busy, done;
  ld_sel_e     ld_sel;
  logic [15:0] ld_row, ld_col;
  logic [31:0] ld_data;
  logic [31:0] z_out [NZ];
  logic [31:0] cycles;

  dfgm_solver #(.NZ(NZ), .NC(NC), .SPLIT(SPLIT), .N_ITER(N_ITER)) dut (.*);

`include "dfgm_tb_body.svh"
endmodule

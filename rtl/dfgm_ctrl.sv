// dfgm_ctrl -- sequencer of one QP solve.
//
// A solve has three parts. The prologue (one clock) resets the dual
// variables to zero (cold start). The main loop then runs N_ITER iterations;
// each iteration is two phases in sequence: phase 1 forms the primal vector
// z = M_z mu_hat + q, phase 2 forms A z and updates the duals. Phase 2 needs
// all of z and the next phase 1 needs all of mu_hat, so the phases cannot
// overlap; inside a phase the datapath is pipelined. The epilogue (one
// clock) copies the final z to the output register and raises done.
//
// Interface: start (ignored while busy) begins a solve; mv1_start/mv2_start
// are one-clock pulses that start a phase; ph1_done/ph2_done are one-clock
// pulses from the datapath when the last element of a phase has been
// written. iter is the current iteration (0..N_ITER-1) and selects the
// momentum coefficient. done pulses for one clock in the epilogue; cycles
// holds the clocks from start to done of the last solve.
// The fixed iteration count follows the paper (500 iterations, no early
// termination); what the prologue and epilogue do is this design's choice.
module dfgm_ctrl #(
  parameter int N_ITER = 500,
  localparam int IW    = (N_ITER > 1) ? $clog2(N_ITER) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          ph1_done,
  input  logic          ph2_done,
  output logic          clear_duals,
  output logic          mv1_start,
  output logic          mv2_start,
  output logic          latch_out,
  output logic [IW-1:0] iter,
  output logic          busy,
  output logic          done,
  output logic [31:0]   cycles
);

  typedef enum logic [2:0] {
    S_IDLE, S_PRO, S_MV1, S_MV2, S_EPI
  } state_e;

  state_e        state;
  logic [31:0]   cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      iter   <= '0;
      cnt    <= '0;
      cycles <= '0;
    end else begin
      if (state != S_IDLE) cnt <= cnt + 1;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_PRO;
          iter  <= '0;
          cnt   <= 32'd1;
        end
        S_PRO:  state <= S_MV1;
        S_MV1:  if (ph1_done) state <= S_MV2;
        S_MV2:  if (ph2_done) begin
          if (iter == IW'(N_ITER - 1)) begin
            state <= S_EPI;
          end else begin
            iter  <= iter + 1'b1;
            state <= S_MV1;
          end
        end
        S_EPI: begin
          state  <= S_IDLE;
          cycles <= cnt;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Phase start pulses: on entry into the phase state.
  logic entering_mv1, entering_mv2;
  assign entering_mv1 = (state == S_PRO) || (state == S_MV2 && ph2_done && iter != IW'(N_ITER - 1));
  assign entering_mv2 = (state == S_MV1) && ph1_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mv1_start <= 1'b0;
      mv2_start <= 1'b0;
    end else begin
      mv1_start <= entering_mv1;
      mv2_start <= entering_mv2;
    end
  end

  assign clear_duals = (state == S_PRO);
  assign latch_out   = (state == S_EPI);
  assign done        = (state == S_EPI);
  assign busy        = (state != S_IDLE);

  a_phase1_done_in_phase: assert property (@(posedge clk) disable iff (!rst_n)
    ph1_done |-> state == S_MV1) else $error("dfgm_ctrl: phase-1 done outside phase 1");
  a_phase2_done_in_phase: assert property (@(posedge clk) disable iff (!rst_n)
    ph2_done |-> state == S_MV2) else $error("dfgm_ctrl: phase-2 done outside phase 2");

endmodule

// phia_fsm: the annealing controller, a machine of five working states
// (plus idle and done):
//   1 ST_INIT   - initialisation: fresh random momenta (and positions on the first run)
//   2 ST_VFIRST - momentum update of the first leapfrog iteration
//   3 ST_ITER   - the remaining num_iter leapfrog iterations
//   4 ST_ACCEPT - acceptance of the run and temperature adjustment
//   5 ST_BEST   - keep the best result so far and test for the stop condition
// The datapath does the work of a state and pulses step_done once for it
// (once per iteration in ST_ITER). The list of states follows the source
// design; the transitions, the counters and the linear schedule
// beta <- min(beta + beta_step, beta_max) applied in state 4 are this
// design's choices. In state 4 `accepted` is sampled with step_done and
// counted in acc_count; in state 5 `target_hit` (with step_done) ends the
// annealing early, otherwise it ends after max_runs runs. A start pulse in
// ST_IDLE or ST_DONE clears the counters and loads beta0. Every transition
// happens on the clock after step_done.
module phia_fsm #(
  parameter int IW = 16,
  parameter int DW = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 step_done,
  input  logic                 accepted,
  input  logic                 target_hit,
  input  logic [IW-1:0]        num_iter,
  input  logic [IW-1:0]        max_runs,
  input  logic signed [DW-1:0] beta0,
  input  logic signed [DW-1:0] beta_step,
  input  logic signed [DW-1:0] beta_max,
  output phia_pkg::state_e     state,
  output logic signed [DW-1:0] beta,
  output logic [IW-1:0]        iter,
  output logic [IW-1:0]        run,
  output logic [IW-1:0]        acc_count,
  output logic                 done
);
  import phia_pkg::*;

  logic signed [DW:0] beta_next;
  assign beta_next = (DW+1)'(beta) + (DW+1)'(beta_step);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      beta      <= '0;
      iter      <= '0;
      run       <= '0;
      acc_count <= '0;
    end else begin
      unique case (state)
        ST_IDLE, ST_DONE: if (start) begin
          state     <= ST_INIT;
          beta      <= beta0;
          iter      <= '0;
          run       <= '0;
          acc_count <= '0;
        end
        ST_INIT:   if (step_done) state <= ST_VFIRST;
        ST_VFIRST: if (step_done) begin
          iter  <= '0;
          state <= (num_iter == '0) ? ST_ACCEPT : ST_ITER;
        end
        ST_ITER:   if (step_done) begin
          iter <= iter + 1'b1;
          if (iter + 1'b1 >= num_iter) state <= ST_ACCEPT;
        end
        ST_ACCEPT: if (step_done) begin
          if (accepted) acc_count <= acc_count + 1'b1;
          if (beta_next > (DW+1)'(beta_max)) beta <= beta_max;
          else                               beta <= DW'(beta_next);
          state <= ST_BEST;
        end
        ST_BEST:   if (step_done) begin
          run <= run + 1'b1;
          if (target_hit || run + 1'b1 >= max_runs) state <= ST_DONE;
          else                                      state <= ST_INIT;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign done = (state == ST_DONE);
endmodule

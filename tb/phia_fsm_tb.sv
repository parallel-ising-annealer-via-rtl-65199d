// phia_fsm_tb: plays the datapath. It answers every state with a step_done
// pulse after a random delay and follows the expected path
// INIT -> VFIRST -> ITER x num_iter -> ACCEPT -> BEST -> INIT ... -> DONE,
// checking the state sequence, the iteration and run counters, the
// acceptance count and the beta schedule (linear, capped at beta_max). It runs
// once to max_runs, once ending early on target_hit, and once with
// num_iter = 0.
module phia_fsm_tb;
  import phia_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, step_done, accepted, target_hit;
  logic [15:0] num_iter, max_runs, iter, run, acc_count;
  logic signed [15:0] beta0, beta_step, beta_max, beta;
  state_e state;
  logic done;
  int checks = 0, failures = 0;
  phia_fsm #(.IW(16), .DW(16)) dut (.clk, .rst_n, .start, .step_done, .accepted, .target_hit,
    .num_iter, .max_runs, .beta0, .beta_step, .beta_max, .state, .beta, .iter, .run, .acc_count, .done);
  always #5 clk = ~clk;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_state(input state_e s, input string what);
    checks++;
    if (state != s) begin failures++; $display("fsm: %s: state %0d expected %0d", what, state, s); end
  endtask
  task automatic finish_step(input logic acc, input logic hit);
    repeat ($urandom_range(0, 5)) @(negedge clk);
    step_done = 1; accepted = acc; target_hit = hit;
    @(negedge clk);
    step_done = 0; accepted = 0; target_hit = 0;
  endtask

  task automatic anneal(input int iters, input int runs, input int hit_run);
    int exp_acc = 0, nruns;
    longint exp_beta;
    num_iter = 16'(iters); max_runs = 16'(runs);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    exp_beta = beta0;
    nruns = (hit_run >= 0) ? hit_run + 1 : runs;
    for (int r = 0; r < nruns; r++) begin
      expect_state(ST_INIT, "init");
      checks++; if (run != 16'(r)) begin failures++; $display("fsm: run %0d exp %0d", run, r); end
      checks++; if (beta != 16'(exp_beta)) begin failures++; $display("fsm: beta %0d exp %0d", beta, exp_beta); end
      finish_step(0, 0);
      expect_state(ST_VFIRST, "vfirst");
      finish_step(0, 0);
      for (int i = 0; i < iters; i++) begin
        expect_state(ST_ITER, "iter");
        checks++; if (iter != 16'(i)) begin failures++; $display("fsm: iter %0d exp %0d", iter, i); end
        finish_step(0, 0);
      end
      expect_state(ST_ACCEPT, "accept");
      finish_step(r % 2 == 0, 0);
      if (r % 2 == 0) exp_acc++;
      exp_beta = (exp_beta + beta_step > beta_max) ? beta_max : exp_beta + beta_step;
      checks++; if (beta != 16'(exp_beta)) begin failures++; $display("fsm: beta after accept %0d exp %0d", beta, exp_beta); end
      checks++; if (acc_count != 16'(exp_acc)) begin failures++; $display("fsm: acc %0d exp %0d", acc_count, exp_acc); end
      expect_state(ST_BEST, "best");
      finish_step(0, r == hit_run);
    end
    expect_state(ST_DONE, "done");
    checks++; if (!done || run != 16'(nruns)) begin failures++; $display("fsm: done=%0d run=%0d", done, run); end
    repeat (3) @(negedge clk);
    expect_state(ST_DONE, "done holds");
  endtask

  initial begin
    start = 0; step_done = 0; accepted = 0; target_hit = 0;
    beta0 = 16'sd512; beta_step = 16'sd300; beta_max = 16'sd1500;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_state(ST_IDLE, "reset");
    anneal(3, 6, -1);
    anneal(2, 10, 3);
    anneal(0, 2, -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

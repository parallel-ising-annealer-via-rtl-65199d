// phia_top_full_tb: the end-to-end test of phia_top_tb at the default size (N = 200), on a planted (Mattis) problem.
// A random sign vector w defines J_ij = w_i * w_j (i != j), h = 0, whose ground
// states are s = +-w with E = -N(N-1)/2. The testbench loads J slice by slice
// and h through the write ports, then
//   A: anneals with every run accepted and the target energy set to the
//      ground energy, and expects the early stop on reaching it;
//   B: anneals with a tolerance no run can meet, so every run is rejected and
//      x restored, long enough for beta to reach its cap.
// Checks: the reported best energy equals the energy the testbench computes
// from best_spins with its own double sum; the ground state is found in A;
// A stops early; the acceptance counter matches the observed decisions;
// beta follows the linear schedule; and the clock count of every controller
// state in the first run matches the timing formulas of the design. Each
// mechanism (the five states, accepted and rejected runs, beta cap, best
// update, early stop) is counted and must have happened at least once.
module phia_top_full_tb;
  import phia_pkg::*;
  localparam int NT  = 200;
  localparam int C   = (NT + LANES - 1) / LANES;
  localparam int JAW = $clog2(NT * C);
  localparam int HAW = $clog2(NT);
  localparam int L   = 8;

  logic clk = 0, rst_n = 0;
  logic j_wr_en, h_wr_en;
  logic [JAW-1:0] j_wr_addr;
  logic [LANES*JW-1:0] j_wr_data;
  logic [HAW-1:0] h_wr_addr;
  logic signed [JW-1:0] h_wr_data;
  logic signed [DW-1:0] cfg_eps, cfg_beta0, cfg_beta_step, cfg_beta_max, cfg_a0, cfg_a1, cfg_a2;
  logic [IW-1:0] cfg_num_iter, cfg_max_runs;
  logic signed [EW-1:0] cfg_target_energy, cfg_accept_tol;
  logic cfg_use_target;
  logic [31:0] cfg_seed;
  logic start, busy, done, step_done, run_accepted, best_updated;
  logic [2:0] state;
  logic [IW-1:0] run, acc_count;
  logic signed [DW-1:0] beta;
  logic signed [EW-1:0] run_energy, best_energy;
  logic [NT-1:0] best_spins;

  phia_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int w [NT];
  // mechanism counters
  int n_state [8];
  int n_accept = 0, n_reject = 0, n_beta_cap = 0, n_best = 0, n_early = 0, n_grad_slices = 0;
  longint cyc = 0, t_enter = 0;
  int dur [8];
  logic first_run_timing;
  logic [2:0] prev_state = 3'(ST_IDLE);

  initial begin
    #20ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    prev_state <= state;
    if (rst_n && state != prev_state) begin
      n_state[state]++;
      if (first_run_timing && prev_state != 3'(ST_IDLE)) dur[prev_state] += int'(cyc - t_enter);
      t_enter <= cyc;
      if (prev_state == 3'(ST_BEST)) first_run_timing <= 1'b0;
    end
    if (step_done && state == 3'(ST_ACCEPT)) begin
      if (run_accepted) n_accept++; else n_reject++;
    end
    if (step_done && state == 3'(ST_ACCEPT) && beta == cfg_beta_max) n_beta_cap++;
    if (best_updated) n_best++;
  end

  function automatic longint energy_of(input logic [NT-1:0] sp);
    longint e = 0;
    for (int i = 0; i < NT; i++)
      for (int j = i + 1; j < NT; j++)
        e -= 1024 * w[i] * w[j] * (sp[i] ? -1 : 1) * (sp[j] ? -1 : 1);
    return e;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic anneal(input longint tol, input int runs, input bit use_target);
    cfg_accept_tol = EW'(tol); cfg_max_runs = IW'(runs); cfg_use_target = use_target;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    longint ground, e_best;
    int acc_before, match_p, match_n;
    for (int k = 0; k < 8; k++) begin n_state[k] = 0; dur[k] = 0; end
    first_run_timing = 1'b1;
    j_wr_en = 0; h_wr_en = 0; start = 0; j_wr_addr = '0; j_wr_data = '0; h_wr_addr = '0; h_wr_data = '0;
    cfg_eps = 16'sd128;  cfg_beta0 = 16'sd256; cfg_beta_step = 16'sd256; cfg_beta_max = 16'sd1024;
    cfg_a0 = 16'sd1024;  cfg_a1 = -16'sd256;   cfg_a2 = -16'sd358;
    cfg_num_iter = IW'(L); cfg_seed = 32'h1234_5678;
    for (int i = 0; i < NT; i++) w[i] = ($urandom_range(0, 1) == 1) ? 1 : -1;
    ground = -1024 * longint'(NT) * (NT - 1) / 2;
    cfg_target_energy = EW'(ground);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load J: word c*N + i holds row i, columns c*32 .. c*32+31
    for (int c = 0; c < C; c++)
      for (int i = 0; i < NT; i++) begin
        @(negedge clk);
        j_wr_en = 1; j_wr_addr = JAW'(c * NT + i); j_wr_data = '0;
        for (int k = 0; k < LANES; k++)
          if (c * LANES + k < NT && c * LANES + k != i)
            j_wr_data[k*JW +: JW] = JW'(1024 * w[i] * w[c * LANES + k]);
        n_grad_slices++;
      end
    for (int i = 0; i < NT; i++) begin
      @(negedge clk); j_wr_en = 0; h_wr_en = 1; h_wr_addr = HAW'(i); h_wr_data = '0;
    end
    @(negedge clk); h_wr_en = 0;

    // ---- A: accept everything, stop on the ground energy
    anneal(64'sd1 <<< 38, 30, 1'b1);
    e_best = energy_of(best_spins);
    check(longint'(best_energy) == e_best, $sformatf("A: best_energy %0d, energy of best_spins %0d", best_energy, e_best));
    check(longint'(best_energy) == ground, $sformatf("A: ground %0d not reached, best %0d", ground, best_energy));
    match_p = 0; match_n = 0;
    for (int i = 0; i < NT; i++) begin
      if ((best_spins[i] ? -1 : 1) == w[i]) match_p++; else match_n++;
    end
    check(match_p == NT || match_n == NT, "A: best spins are not +-w");
    check(run < 30, "A: no early stop");
    if (run < 30) n_early++;
    check(acc_count == run, $sformatf("A: acc_count %0d, runs %0d", acc_count, run));
    $display("A: stopped after %0d runs, best %0d (ground %0d)", run, best_energy, ground);

    // timing of the first run against the formulas
    check(dur[ST_INIT]   == (NT + 1) / 2 + 3,                   $sformatf("state 1 took %0d", dur[ST_INIT]));
    check(dur[ST_VFIRST] == C * (NT + 2) + NT + 23,             $sformatf("state 2 took %0d", dur[ST_VFIRST]));
    check(dur[ST_ITER]   == L * (C * (NT + 2) + 2 * NT + 30),   $sformatf("state 3 took %0d", dur[ST_ITER]));
    check(dur[ST_ACCEPT] == NT + 10,                            $sformatf("state 4 took %0d", dur[ST_ACCEPT]));
    check(dur[ST_BEST]   == 3,                                  $sformatf("state 5 took %0d", dur[ST_BEST]));

    // ---- B: reject every run, run long enough for beta to reach its cap
    acc_before = n_reject;
    anneal(-(64'sd1 <<< 38), 5, 1'b0);
    e_best = energy_of(best_spins);
    check(longint'(best_energy) == e_best, $sformatf("B: best_energy %0d, energy of best_spins %0d", best_energy, e_best));
    check(acc_count == 0, "B: a run was accepted");
    check(n_reject - acc_before == 5, "B: not every run rejected");
    check(run == 5, "B: wrong number of runs");
    check(beta == cfg_beta_max, $sformatf("B: beta %0d not capped", beta));

    // ---- every mechanism happened
    check(n_state[ST_INIT] > 0 && n_state[ST_VFIRST] > 0 && n_state[ST_ITER] > 0 &&
          n_state[ST_ACCEPT] > 0 && n_state[ST_BEST] > 0, "a controller state never ran");
    check(n_accept > 0,   "no accepted run");
    check(n_reject > 0,   "no rejected run");
    check(n_beta_cap > 0, "beta never reached its cap");
    check(n_best > 0,     "best result never updated");
    check(n_early > 0,    "no early stop on the target energy");
    $display("mechanisms: runs(state1)=%0d accepted=%0d rejected=%0d beta_cap=%0d best_updates=%0d early_stop=%0d J_slices=%0d",
             n_state[ST_INIT], n_accept, n_reject, n_beta_cap, n_best, n_early, n_grad_slices);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

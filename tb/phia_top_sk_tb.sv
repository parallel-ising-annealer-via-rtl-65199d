// phia_top_sk_tb: runs the annealer on small instances of benchmark families
// and compares with the exact ground state found by exhaustive search
// (2^16 configurations). The families, at n = 16:
//   sk_ising   - Sherrington-Kirkpatrick couplings J_ij = +-1, h = 0
//   spin_model - J_ij and h_i uniform in (-1, 1), quantised to 2^-10
//   maxcut_d3  - unweighted 3-regular graph (ring plus diameters), J = -1 on edges
// For every instance: the reported best energy must equal the energy the
// testbench computes from best_spins, no reported energy may be below the
// exhaustive ground energy, and the annealer must reach the ground energy
// within the run budget (with the target-energy stop enabled).
// Settings: eps = 0.25, beta held at 0.5, L = 10 steps per run, every run
// accepted. They come from a small sweep on these instances; colder settings
// (beta ramped to 1 or more) left the spin_model instances in local minima.
module phia_top_sk_tb;
  import phia_pkg::*;
  localparam int NT  = 16;
  localparam int C   = 1;
  localparam int JAW = $clog2(NT * C);
  localparam int HAW = $clog2(NT);
  localparam int RUNS = 200;

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

  phia_top #(.N(NT)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint J [NT][NT];
  longint h [NT];

  initial begin
    #200ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint energy_of(input logic [NT-1:0] sp);
    longint e = 0;
    for (int i = 0; i < NT; i++) begin
      for (int j = i + 1; j < NT; j++)
        e -= J[i][j] * (sp[i] ? -1 : 1) * (sp[j] ? -1 : 1);
      e -= h[i] * (sp[i] ? -1 : 1);
    end
    return e;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run_instance(input string name);
    longint ground, e, eb;
    ground = energy_of('0);
    for (int c = 1; c < (1 << NT); c++) begin
      e = energy_of(NT'(c));
      if (e < ground) ground = e;
    end
    // load
    for (int i = 0; i < NT; i++) begin
      @(negedge clk);
      j_wr_en = 1; j_wr_addr = JAW'(i); j_wr_data = '0;
      for (int k = 0; k < NT; k++) j_wr_data[k*JW +: JW] = JW'(J[i][k]);
    end
    for (int i = 0; i < NT; i++) begin
      @(negedge clk); j_wr_en = 0; h_wr_en = 1; h_wr_addr = HAW'(i); h_wr_data = JW'(h[i]);
    end
    @(negedge clk); h_wr_en = 0;
    cfg_target_energy = EW'(ground);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    eb = energy_of(best_spins);
    check(longint'(best_energy) == eb, $sformatf("%s: best_energy %0d but best_spins give %0d", name, best_energy, eb));
    check(longint'(best_energy) >= ground, $sformatf("%s: energy %0d below the ground %0d", name, best_energy, ground));
    check(longint'(best_energy) == ground, $sformatf("%s: ground %0d not reached in %0d runs (best %0d)", name, ground, RUNS, best_energy));
    $display("%s: ground %0.3f, best %0.3f after %0d runs, %0d accepted", name,
             real'(ground) / 1024.0, real'(best_energy) / 1024.0, run, acc_count);
  endtask

  initial begin
    j_wr_en = 0; h_wr_en = 0; start = 0; j_wr_addr = '0; j_wr_data = '0; h_wr_addr = '0; h_wr_data = '0;
    cfg_eps = 16'sd256;  cfg_beta0 = 16'sd512; cfg_beta_step = 16'sd0;  cfg_beta_max = 16'sd512;
    cfg_a0 = 16'sd1024;  cfg_a1 = -16'sd256;   cfg_a2 = -16'sd358;
    cfg_num_iter = 16'd10; cfg_max_runs = 16'(RUNS); cfg_use_target = 1'b1;
    cfg_accept_tol = 40'sd1 <<< 36; cfg_seed = 32'hC0FFEE11;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int inst = 0; inst < 2; inst++) begin
      // sk_ising
      for (int i = 0; i < NT; i++) begin
        J[i][i] = 0; h[i] = 0;
        for (int j = i + 1; j < NT; j++) begin
          J[i][j] = ($urandom_range(0, 1) == 1) ? 1024 : -1024;
          J[j][i] = J[i][j];
        end
      end
      run_instance($sformatf("sk_ising #%0d", inst));
      // spin_model
      for (int i = 0; i < NT; i++) begin
        J[i][i] = 0; h[i] = longint'($urandom_range(0, 2046)) - 1023;
        for (int j = i + 1; j < NT; j++) begin
          J[i][j] = longint'($urandom_range(0, 2046)) - 1023;
          J[j][i] = J[i][j];
        end
      end
      run_instance($sformatf("spin_model #%0d", inst));
    end
    // maxcut_d3: ring i-(i+1) plus diameters i-(i+8)
    for (int i = 0; i < NT; i++) begin
      h[i] = 0;
      for (int j = 0; j < NT; j++) J[i][j] = 0;
    end
    for (int i = 0; i < NT; i++) begin
      J[i][(i + 1) % NT] = -1024; J[(i + 1) % NT][i] = -1024;
      J[i][(i + NT / 2) % NT] = -1024; J[(i + NT / 2) % NT][i] = -1024;
    end
    run_instance("maxcut_d3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

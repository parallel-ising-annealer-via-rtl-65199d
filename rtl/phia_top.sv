// phia_top: parallel Hamiltonian-Monte-Carlo Ising annealer.
//
// The annealer searches for a low-energy spin configuration s in {-1,+1}^N of
//   E(s) = -sum_{i<j} J_ij s_i s_j - sum_i h_i s_i.
// Each spin is relaxed to a continuous position x_i with momentum v_i, the
// spin being sgn(x_i). Trajectories of the Hamiltonian
//   H(x, v) = beta * E(sgn x) + (x'x + v'v) / 2
// are integrated with the step
//   x <- x + eps * v,   v <- v + eps * (beta * f1(x) * I(sgn x) - x),
//   I_i = sum_j J_ij sgn(x_j) + h_i,
// where f1 is a quadratic stand-in for the derivative of tanh (FUNC1). Every
// coordinate is updated with the same rule and independently of the others,
// so the work is streamed through shared pipelines.
//
// Datapath (all one element or one 32-column slice per clock):
//   j_rom/h_rom  - coupling and field memories, loaded through the j_wr/h_wr ports
//   func2        - local fields I_i, one pass per 32-column slice of J ((N+2) clocks each)
//   vdot_block   - momentum derivative for one spin per clock (FUNC1, MULTIs, Inverter, ADDER2)
//   integral     - two instances: x <- x + eps*v and v <- v + eps*vdot
//   hamiltonian  - H(x, v) and E(sgn x) over one pass of the spins
//   momentum_rng - two random momenta per clock
//   phia_fsm     - the five-state controller; the phase sequencer below runs the passes of each state
//
// Passes of each controller state:
//   1 INIT   : draw v (and x on the first run of a start), 2 spins per clock; copy x to x0
//   2 VFIRST : GRAD (fields at x) then VUPD (v update)
//   3 ITER   : per iteration XHAM (H and E at the current (x, v), then x <- x + eps*v),
//              GRAD, VUPD; repeated cfg_num_iter times
//   4 ACCEPT : HAM (H and E at the end point); the run is accepted when
//              H_end - H_start <= cfg_accept_tol, otherwise x is restored from x0
//   5 BEST   : keep the lowest E seen and its spins; stop when it is <= cfg_target_energy
//              (if cfg_use_target) or after cfg_max_runs runs
// Timing, with C = ceil(N/32) slices and L = cfg_num_iter, in clocks from
// entering a controller state to entering the next one:
//   state 1: ceil(N/2) + 3        state 2: C*(N+2) + N + 23
//   state 3: L * (C*(N+2) + 2N + 30)
//   state 4: N + 10               state 5: 3
// (GRAD takes C*(N+2) + 10 clocks, VUPD N + 11, XHAM and HAM N + 7.)
//
// Spins are reported as sign bits: best_spins[i] = 1 means s_i = -1. Energies
// carry 10 fraction bits. Passes, the slice order of J, the acceptance rule,
// the temperature schedule, the stop test and all widths are choices of this
// design; the state list, the block structure and the formulas follow the
// source design. Parameters must satisfy N >= 8 (the field of a row must be
// written back before the next slice of the same row reads it).
module phia_top
  import phia_pkg::*;
#(
  parameter int N = 200,
  localparam int C   = (N + LANES - 1) / LANES,
  localparam int JAW = $clog2(N * C),
  localparam int HAW = $clog2(N),
  localparam int NW  = $clog2(N + 2) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // problem loading
  input  logic                 j_wr_en,
  input  logic [JAW-1:0]       j_wr_addr,
  input  logic [LANES*JW-1:0]  j_wr_data,
  input  logic                 h_wr_en,
  input  logic [HAW-1:0]       h_wr_addr,
  input  logic signed [JW-1:0] h_wr_data,
  // configuration, held while busy
  input  logic signed [DW-1:0] cfg_eps,
  input  logic signed [DW-1:0] cfg_beta0,
  input  logic signed [DW-1:0] cfg_beta_step,
  input  logic signed [DW-1:0] cfg_beta_max,
  input  logic signed [DW-1:0] cfg_a0,
  input  logic signed [DW-1:0] cfg_a1,
  input  logic signed [DW-1:0] cfg_a2,
  input  logic [IW-1:0]        cfg_num_iter,
  input  logic [IW-1:0]        cfg_max_runs,
  input  logic signed [EW-1:0] cfg_target_energy,
  input  logic                 cfg_use_target,
  input  logic signed [EW-1:0] cfg_accept_tol,
  input  logic [31:0]          cfg_seed,
  // control and results
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic [2:0]           state,
  output logic [IW-1:0]        run,
  output logic [IW-1:0]        acc_count,
  output logic signed [DW-1:0] beta,
  output logic                 step_done,
  output logic                 run_accepted,
  output logic                 best_updated,
  output logic signed [EW-1:0] run_energy,
  output logic signed [EW-1:0] best_energy,
  output logic [N-1:0]         best_spins
);
  typedef enum logic [2:0] {
    PH_IDLE, PH_INIT, PH_SNAP, PH_GRAD, PH_VUPD, PH_XHAM, PH_DECIDE, PH_BEST
  } phase_e;

  // ------------------------------------------------------------------ state
  data_t   x_mem  [N];
  data_t   x0_mem [N];
  data_t   v_mem  [N];
  field_t  f_mem  [N];

  state_e  st;
  logic [IW-1:0] iter;
  logic    accepted, target_hit;
  logic    first_run;

  phase_e  ph;
  logic [NW-1:0] cnt;        // issue index within a pass
  logic [NW-1:0] cc;         // slice index in GRAD
  logic [4:0]    drain;      // clocks left after the last issue
  logic          issuing;
  logic          xupd;       // XHAM updates x, HAM (state 4) does not

  logic signed [EW-1:0] h_start, e_start, h_end, e_end;
  logic                 have_best;

  // --------------------------------------------------------------- controller
  phia_fsm #(.IW(IW), .DW(DW)) u_fsm (
    .clk, .rst_n, .start, .step_done, .accepted, .target_hit,
    .num_iter(cfg_num_iter), .max_runs(cfg_max_runs),
    .beta0(cfg_beta0), .beta_step(cfg_beta_step), .beta_max(cfg_beta_max),
    .state(st), .beta, .iter, .run, .acc_count, .done
  );
  assign state = st;
  assign busy  = (st != ST_IDLE) && (st != ST_DONE);

  // ------------------------------------------------------------------ memories
  logic [JAW-1:0]        j_rd_addr;
  logic [LANES*JW-1:0]   j_rd_data;
  logic [HAW-1:0]        h_rd_addr;
  logic signed [JW-1:0]  h_rd_data;

  j_rom #(.N(N), .LANES(LANES), .JW(JW)) u_jrom (
    .clk, .wr_en(j_wr_en), .wr_addr(j_wr_addr), .wr_data(j_wr_data),
    .rd_addr(j_rd_addr), .rd_data(j_rd_data));
  h_rom #(.N(N), .JW(JW)) u_hrom (
    .clk, .wr_en(h_wr_en), .wr_addr(h_wr_addr), .wr_data(h_wr_data),
    .rd_addr(h_rd_addr), .rd_data(h_rd_data));

  // ------------------------------------------------------------- issue stage
  logic          iss_vld;
  assign iss_vld = issuing && (cnt < NW'(N)) &&
                   (ph == PH_GRAD || ph == PH_VUPD || ph == PH_XHAM);

  always_comb begin
    j_rd_addr = JAW'(32'(cc) * N + 32'(cnt));
    h_rd_addr = HAW'(cnt);
  end

  // stage 1: memory data valid, arrays read with the registered index
  logic          s1_vld, s1_last;
  logic [HAW-1:0] s1_idx;
  logic [NW-1:0]  s1_c;
  phase_e        s1_ph;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_vld <= 1'b0; s1_last <= 1'b0; s1_idx <= '0; s1_c <= '0; s1_ph <= PH_IDLE;
    end else begin
      s1_vld  <= iss_vld;
      s1_last <= iss_vld && (cnt == NW'(N - 1));
      s1_idx  <= HAW'(cnt);
      s1_c    <= cc;
      s1_ph   <= ph;
    end
  end

  logic [HAW-1:0] rd_i;
  assign rd_i = s1_idx;
  data_t  rd_x, rd_v;
  field_t rd_f;
  assign rd_x = x_mem[rd_i];
  assign rd_v = v_mem[rd_i];
  assign rd_f = f_mem[rd_i];

  // ---------------------------------------------------------------- GRAD pass
  logic [LANES-1:0] sgn_slice;
  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      sgn_slice[k] = 1'b0;
      for (int c = 0; c < C; c++)
        if (32'(s1_c) == c && c * LANES + k < N) sgn_slice[k] = x_mem[c * LANES + k][DW-1];
    end
  end

  logic   f2_in_vld, f2_out_vld;
  field_t f2_acc_in, f2_field;
  assign f2_in_vld = s1_vld && (s1_ph == PH_GRAD);
  assign f2_acc_in = (s1_c == '0) ? FW'(h_rd_data) : rd_f;

  func2 #(.LANES(LANES), .JW(JW), .FW(FW)) u_func2 (
    .clk, .rst_n, .in_valid(f2_in_vld), .j_row(j_rd_data), .sgn(sgn_slice),
    .acc_in(f2_acc_in), .out_valid(f2_out_vld), .field(f2_field));

  logic [HAW-1:0] f2_idx [7];
  always_ff @(posedge clk) begin
    f2_idx[0] <= rd_i;
    for (int k = 1; k < 7; k++) f2_idx[k] <= f2_idx[k-1];
  end

  // ---------------------------------------------------------------- VUPD pass
  logic   vd_in_vld, vd_out_vld;
  field_t vdot;
  assign vd_in_vld = s1_vld && (s1_ph == PH_VUPD);

  vdot_block #(.DW(DW), .FW(FW), .FRAC(FRAC)) u_vdot (
    .clk, .rst_n, .in_valid(vd_in_vld), .x(rd_x), .field(rd_f), .beta,
    .a0(cfg_a0), .a1(cfg_a1), .a2(cfg_a2), .out_valid(vd_out_vld), .vdot);

  logic [HAW-1:0] vd_idx [6];
  always_ff @(posedge clk) begin
    vd_idx[0] <= rd_i;
    for (int k = 1; k < 6; k++) vd_idx[k] <= vd_idx[k-1];
  end

  data_t          v_next;
  logic [1:0]     vw_vld;
  logic [HAW-1:0] vw_idx [2];
  integral #(.WS(DW), .WD(FW), .FRAC(FRAC)) u_int_v (
    .clk, .state(v_mem[vd_idx[5]]), .deriv(vdot), .eps(cfg_eps), .next(v_next));

  // ------------------------------------------------------------ XHAM/HAM pass
  logic ham_start, ham_done;
  logic signed [EW-1:0] ham_h, ham_e;
  logic xh_vld;
  assign xh_vld = s1_vld && (s1_ph == PH_XHAM);

  hamiltonian #(.DW(DW), .FW(FW), .JW(JW), .EW(EW), .FRAC(FRAC)) u_ham (
    .clk, .rst_n, .start(ham_start), .in_valid(xh_vld), .in_last(s1_last),
    .x(rd_x), .v(rd_v), .s_neg(rd_x[DW-1]), .jfield(rd_f - FW'(h_rd_data)),
    .h(h_rd_data), .beta, .done(ham_done), .ham(ham_h), .energy(ham_e));

  data_t          x_next;
  logic [1:0]     xw_vld;
  logic [HAW-1:0] xw_idx [2];
  integral #(.WS(DW), .WD(DW), .FRAC(FRAC)) u_int_x (
    .clk, .state(rd_x), .deriv(rd_v), .eps(cfg_eps), .next(x_next));

  // ------------------------------------------------------------- random momenta
  data_t r0, r1;
  logic  rng_en;
  assign rng_en = (ph == PH_INIT);
  momentum_rng #(.DW(DW)) u_rng (
    .clk, .rst_n, .load(start && !busy), .seed(cfg_seed), .en(rng_en), .r0, .r1);

  // -------------------------------------------------------- phase sequencer
  logic signed [EW:0] dh;
  assign dh = (EW+1)'(h_end) - (EW+1)'(h_start);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= PH_IDLE; cnt <= '0; cc <= '0; drain <= '0; issuing <= 1'b0; xupd <= 1'b0;
      step_done <= 1'b0; ham_start <= 1'b0; accepted <= 1'b0; target_hit <= 1'b0;
      h_start <= '0; e_start <= '0; h_end <= '0; e_end <= '0;
      have_best <= 1'b0; best_energy <= '0; run_energy <= '0; first_run <= 1'b0;
      run_accepted <= 1'b0; best_updated <= 1'b0;
      vw_vld <= '0; xw_vld <= '0;
    end else begin
      step_done    <= 1'b0;
      ham_start    <= 1'b0;
      best_updated <= 1'b0;
      vw_vld <= {vw_vld[0], vd_out_vld};
      xw_vld <= {xw_vld[0], xh_vld && xupd};

      if (start && !busy) begin
        have_best <= 1'b0;
        first_run <= 1'b1;
      end

      unique case (ph)
        PH_IDLE: if (!step_done) begin
          cnt <= '0; cc <= '0; issuing <= 1'b1;
          unique case (st)
            ST_INIT:   ph <= PH_INIT;
            ST_VFIRST: ph <= PH_GRAD;
            ST_ITER:   begin ph <= PH_XHAM; xupd <= 1'b1; ham_start <= 1'b1; end
            ST_ACCEPT: begin ph <= PH_XHAM; xupd <= 1'b0; ham_start <= 1'b1; end
            ST_BEST:   ph <= PH_BEST;
            default:   issuing <= 1'b0;
          endcase
        end
        PH_INIT: begin
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 >= NW'((N + 1) / 2)) ph <= PH_SNAP;
        end
        PH_SNAP: begin
          first_run <= 1'b0;
          step_done <= 1'b1;
          ph        <= PH_IDLE;
        end
        PH_GRAD: begin
          if (issuing) begin
            if (cnt == NW'(N + 1)) begin
              cnt <= '0;
              if (cc == NW'(C - 1)) begin issuing <= 1'b0; drain <= 5'd9; end
              else cc <= cc + 1'b1;
            end else cnt <= cnt + 1'b1;
          end else if (drain != '0) drain <= drain - 1'b1;
          else begin
            ph <= PH_VUPD; cnt <= '0; cc <= '0; issuing <= 1'b1;
          end
        end
        PH_VUPD: begin
          if (issuing) begin
            if (cnt == NW'(N - 1)) begin issuing <= 1'b0; drain <= 5'd10; end
            cnt <= cnt + 1'b1;
          end else if (drain != '0) drain <= drain - 1'b1;
          else begin
            step_done <= 1'b1;
            ph        <= PH_IDLE;
          end
        end
        PH_XHAM: begin
          if (issuing) begin
            if (cnt == NW'(N - 1)) issuing <= 1'b0;
            cnt <= cnt + 1'b1;
          end else if (ham_done) begin
            h_end <= ham_h;
            e_end <= ham_e;
            if (xupd && iter == '0) begin
              h_start <= ham_h;
              e_start <= ham_e;
            end
            if (xupd) begin
              ph <= PH_GRAD; cnt <= '0; cc <= '0; issuing <= 1'b1;
            end else ph <= PH_DECIDE;
          end
        end
        PH_DECIDE: begin
          // accept when H did not grow by more than the tolerance
          accepted     <= (cfg_num_iter == '0) || (dh <= (EW+1)'(cfg_accept_tol));
          run_accepted <= (cfg_num_iter == '0) || (dh <= (EW+1)'(cfg_accept_tol));
          run_energy   <= ((cfg_num_iter == '0) || (dh <= (EW+1)'(cfg_accept_tol))) ? e_end : e_start;
          step_done    <= 1'b1;
          ph           <= PH_IDLE;
        end
        PH_BEST: begin
          if (!have_best || run_energy < best_energy) begin
            best_energy  <= run_energy;
            best_updated <= 1'b1;
            target_hit   <= cfg_use_target && (run_energy <= cfg_target_energy);
          end else begin
            target_hit   <= cfg_use_target && (best_energy <= cfg_target_energy);
          end
          have_best <= 1'b1;
          step_done <= 1'b1;
          ph        <= PH_IDLE;
        end
        default: ph <= PH_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    vw_idx[0] <= vd_idx[5];
    vw_idx[1] <= vw_idx[0];
    xw_idx[0] <= rd_i;
    xw_idx[1] <= xw_idx[0];
  end

  // ------------------------------------------------------------- array writes
  always_ff @(posedge clk) begin
    // positions: random start, integration step, or restore of a rejected run
    if (ph == PH_INIT && first_run) begin
      x_mem[HAW'(2 * 32'(cnt))] <= r1 >>> 3;
      if (2 * 32'(cnt) + 1 < N) x_mem[HAW'(2 * 32'(cnt) + 1)] <= r0 >>> 3;
    end
    if (xw_vld[1]) x_mem[xw_idx[1]] <= x_next;
    if (ph == PH_DECIDE && !((cfg_num_iter == '0) || (dh <= (EW+1)'(cfg_accept_tol))))
      for (int i = 0; i < N; i++) x_mem[i] <= x0_mem[i];

    if (ph == PH_SNAP)
      for (int i = 0; i < N; i++) x0_mem[i] <= x_mem[i];

    // momenta: fresh draw, or integration step
    if (ph == PH_INIT) begin
      v_mem[HAW'(2 * 32'(cnt))] <= r0;
      if (2 * 32'(cnt) + 1 < N) v_mem[HAW'(2 * 32'(cnt) + 1)] <= r1;
    end
    if (vw_vld[1]) v_mem[vw_idx[1]] <= v_next;

    // local fields
    if (f2_out_vld) f_mem[f2_idx[6]] <= f2_field;
  end

  // best configuration, captured in state 5 from the (possibly restored) x
  always_ff @(posedge clk) begin
    if (ph == PH_BEST && (!have_best || run_energy < best_energy))
      for (int i = 0; i < N; i++) best_spins[i] <= x_mem[i][DW-1];
  end

  // ---------------------------------------------------------------- checks
  initial begin
    if (N < 8) $error("phia_top: N must be at least 8");
  end
endmodule

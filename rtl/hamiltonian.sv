// hamiltonian: the block that evaluates the HMC Hamiltonian
//   H(x, v) = beta * E(sgn x) + (x'x + v'v) / 2,
//   E(s)    = -(s'Js)/2 - h's   (symmetric J, zero diagonal),
// from a stream of one spin per clock: x_i, v_i, the sign of x_i, the row sum
// jfield_i = sum_j J_ij sgn(x_j) (already produced by FUNC2, so J is not read
// a second time) and h_i. SQUAREs form x_i^2 and v_i^2, an ADDER2 adds them,
// and running sums accumulate x^2 + v^2, s_i * jfield_i (giving s'Js) and
// s_i * h_i (giving h's). After the element flagged in_last the final sums are
// selected, E is formed, multiplied by beta in a MULTI and added to the
// kinetic/Gaussian part. Pulse `start` before the stream to clear the sums.
// `done` pulses 6 clocks after the last element, with `ham` and `energy`
// (both with FRAC fraction bits) valid from then until the next start.
module hamiltonian #(
  parameter int DW   = 16,
  parameter int FW   = 24,
  parameter int JW   = 16,
  parameter int EW   = 40,
  parameter int FRAC = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 in_valid,
  input  logic                 in_last,
  input  logic signed [DW-1:0] x,
  input  logic signed [DW-1:0] v,
  input  logic                 s_neg,
  input  logic signed [FW-1:0] jfield,
  input  logic signed [JW-1:0] h,
  input  logic signed [DW-1:0] beta,
  output logic                 done,
  output logic signed [EW-1:0] ham,
  output logic signed [EW-1:0] energy
);
  localparam int QW = 2*DW - FRAC + 1;   // width of a square in FRAC scale

  logic signed [QW-1:0] x2, v2;
  logic signed [QW:0]   q;
  logic signed [FW:0]   sj1, sj2;
  logic signed [JW:0]   sh1, sh2;
  logic                 vld1, vld2, last1, last2;
  logic signed [EW-1:0] acc_q, acc_sjs, acc_hs;
  logic                 fin1, fin2, fin3;
  logic signed [EW-1:0] e_q, kin_q, kin_q2, be;

  // stage 1: squares and signed products
  square #(.WI(DW), .WO(QW), .FRAC(FRAC)) u_sqx (.clk, .a(x), .sq(x2));
  square #(.WI(DW), .WO(QW), .FRAC(FRAC)) u_sqv (.clk, .a(v), .sq(v2));
  always_ff @(posedge clk) begin
    sj1 <= s_neg ? -(FW+1)'(jfield) : (FW+1)'(jfield);
    sh1 <= s_neg ? -(JW+1)'(h)      : (JW+1)'(h);
    sj2 <= sj1;
    sh2 <= sh1;
  end

  // stage 2: x_i^2 + v_i^2
  adder2 #(.W(QW+1)) u_add (.clk, .a((QW+1)'(x2)), .b((QW+1)'(v2)), .sum(q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {vld1, vld2, last1, last2, fin1, fin2, fin3, done} <= '0;
      acc_q <= '0; acc_sjs <= '0; acc_hs <= '0;
      e_q <= '0; kin_q <= '0; kin_q2 <= '0; ham <= '0; energy <= '0;
    end else begin
      vld1  <= in_valid;           last1 <= in_valid & in_last;
      vld2  <= vld1;               last2 <= last1;
      // running sums sum_{i=1..k}
      if (start) begin
        acc_q <= '0; acc_sjs <= '0; acc_hs <= '0;
      end else if (vld2) begin
        acc_q   <= acc_q   + EW'(q);
        acc_sjs <= acc_sjs + EW'(sj2);
        acc_hs  <= acc_hs  + EW'(sh2);
      end
      // partial select of the complete sums, then E, beta*E and H
      fin1 <= last2;
      if (fin1) begin
        e_q   <= -(acc_sjs >>> 1) - acc_hs;
        kin_q <= acc_q >>> 1;
      end
      fin2 <= fin1;
      if (fin2) kin_q2 <= kin_q;
      fin3 <= fin2;
      done <= fin3;
      if (fin3) begin
        ham    <= be + kin_q2;
        energy <= e_q;
      end
    end
  end

  // beta * E, one clock (operands valid at fin2, product at fin3)
  multi #(.WA(DW), .WB(EW), .WO(EW), .FRAC(FRAC)) u_beta (.clk, .a(beta), .b(e_q), .p(be));
endmodule

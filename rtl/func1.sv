// func1: FUNC1, the derivative of the smoothed sign function.
// The gradient of the Ising term needs d/dx tanh(gamma*x) =
// gamma*(1 - tanh^2(gamma*x)); it is replaced by the quadratic
//   d = a2*u^2 + a1*u + a0,   u = |x|,
// evaluated with one SQUARE, two MULTIs and two ADDER2s as in the source
// design, and clamped at zero. Using |x| (the target function is even) and
// the clamp are this design's choices. gamma is folded into a0..a2, which are
// run-time inputs expected to be held constant while data streams through.
// Pipeline: |x| -> {SQUARE, a1*u} -> {a2*u^2} -> ADDER2 -> ADDER2 (+a0);
// d belongs to the x presented 4 clocks earlier; one x per clock.
module func1 #(
  parameter int W    = 16,
  parameter int FRAC = 10
) (
  input  logic                clk,
  input  logic signed [W-1:0] x,
  input  logic signed [W-1:0] a0,
  input  logic signed [W-1:0] a1,
  input  logic signed [W-1:0] a2,
  output logic signed [W-1:0] d
);
  logic signed [W-1:0]   u;
  logic signed [W-1:0]   u2, a1u, a1u_q, a2u2;
  logic signed [W+1:0]   lin, quad;

  // |x|, saturating the most negative code
  always_comb begin
    if (x == {1'b1, {(W-1){1'b0}}}) u = {1'b0, {(W-1){1'b1}}};
    else if (x < 0)                 u = -x;
    else                            u = x;
  end

  square #(.WI(W), .WO(W), .FRAC(FRAC))           u_sq  (.clk, .a(u),  .sq(u2));
  multi  #(.WA(W), .WB(W), .WO(W), .FRAC(FRAC))   u_m1  (.clk, .a(a1), .b(u),  .p(a1u));
  multi  #(.WA(W), .WB(W), .WO(W), .FRAC(FRAC))   u_m2  (.clk, .a(a2), .b(u2), .p(a2u2));
  always_ff @(posedge clk) a1u_q <= a1u;
  adder2 #(.W(W+2)) u_add1 (.clk, .a((W+2)'(a1u_q)), .b((W+2)'(a2u2)), .sum(lin));
  adder2 #(.W(W+2)) u_add0 (.clk, .a(lin), .b((W+2)'(a0)), .sum(quad));

  // clamp to [0, max]
  always_comb begin
    if (quad < 0)                                  d = '0;
    else if (quad > (W+2)'({1'b0, {(W-1){1'b1}}})) d = {1'b0, {(W-1){1'b1}}};
    else                                           d = W'(quad);
  end
endmodule

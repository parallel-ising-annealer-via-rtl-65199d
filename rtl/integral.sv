// integral: INTEGRAL, one explicit integration step of the leapfrog scheme,
//   next = sat(state + eps * deriv).
// Used for the position update x <- x + eps*v and, with a wider derivative
// input, for the momentum update v <- v + eps*vdot. It is a MULTI (one clock)
// followed by a saturating add (one clock): `next` belongs to the operands
// presented two clocks earlier. The state operand is delayed internally by one
// clock so that both inputs are presented in the same cycle.
module integral #(
  parameter int WS   = 16,
  parameter int WD   = 16,
  parameter int FRAC = 10
) (
  input  logic                 clk,
  input  logic signed [WS-1:0] state,
  input  logic signed [WD-1:0] deriv,
  input  logic signed [15:0]   eps,
  output logic signed [WS-1:0] next
);
  logic signed [WS-1:0] step;
  logic signed [WS-1:0] state_q;
  logic signed [WS-1:0] total;

  multi #(.WA(16), .WB(WD), .WO(WS), .FRAC(FRAC)) u_mul (.clk, .a(eps), .b(deriv), .p(step));

  always_ff @(posedge clk) state_q <= state;

  always_comb total = WS'(phia_pkg::sat_to(64'(state_q) + 64'(step), WS));
  always_ff @(posedge clk) next <= total;
endmodule

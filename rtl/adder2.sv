// adder2: ADDER2, the two-input adder from which the annealer's arithmetic is
// built. Sum of two signed W-bit operands, registered: the result appears one
// clock after the operands. It wraps on overflow; every user sizes W so that
// the sum cannot overflow. The single register stage follows the register
// columns drawn for the ADDER32 tree; the width is a parameter of this design.
module adder2 #(
  parameter int W = 24
) (
  input  logic                clk,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] sum
);
  always_ff @(posedge clk) sum <= a + b;
endmodule

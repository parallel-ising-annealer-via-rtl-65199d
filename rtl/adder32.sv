// adder32: ADDER32, a 32-input adder built as a 5-stage pipelined binary tree
// of 31 ADDER2s (16 + 8 + 4 + 2 + 1). Every stage is one column of
// registers, so the sum of Data(1)..Data(32) presented at cycle t is on `sum`
// at cycle t+5, and a new set of 32 operands can be accepted every cycle.
// The tree shape, the 5 stages and the 31 adders follow the source design;
// the operand width W is this design's choice (it must hold the full sum).
module adder32 #(
  parameter int W = 21
) (
  input  logic                clk,
  input  logic signed [W-1:0] data [32],
  output logic signed [W-1:0] sum
);
  // level k holds 32 >> k partial sums
  logic signed [W-1:0] s1 [16];
  logic signed [W-1:0] s2 [8];
  logic signed [W-1:0] s3 [4];
  logic signed [W-1:0] s4 [2];

  for (genvar i = 0; i < 16; i++) begin : g_l1
    adder2 #(.W(W)) u_add (.clk, .a(data[2*i]), .b(data[2*i+1]), .sum(s1[i]));
  end
  for (genvar i = 0; i < 8; i++) begin : g_l2
    adder2 #(.W(W)) u_add (.clk, .a(s1[2*i]), .b(s1[2*i+1]), .sum(s2[i]));
  end
  for (genvar i = 0; i < 4; i++) begin : g_l3
    adder2 #(.W(W)) u_add (.clk, .a(s2[2*i]), .b(s2[2*i+1]), .sum(s3[i]));
  end
  for (genvar i = 0; i < 2; i++) begin : g_l4
    adder2 #(.W(W)) u_add (.clk, .a(s3[2*i]), .b(s3[2*i+1]), .sum(s4[i]));
  end
  adder2 #(.W(W)) u_l5 (.clk, .a(s4[0]), .b(s4[1]), .sum(sum));
endmodule

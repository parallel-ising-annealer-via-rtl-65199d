// inverter: the Inverter of the gradient block. Produces the restoring term
// -x of the momentum derivative as a registered two's complement negation,
// sign-extended from WI to WO bits first so that the most negative input does
// not overflow. Latency one clock.
module inverter #(
  parameter int WI = 16,
  parameter int WO = 24
) (
  input  logic                 clk,
  input  logic signed [WI-1:0] a,
  output logic signed [WO-1:0] neg
);
  logic signed [WO-1:0] ext;
  assign ext = WO'(a);
  always_ff @(posedge clk) neg <= -ext;
endmodule

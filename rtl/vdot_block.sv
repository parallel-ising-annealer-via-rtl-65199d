// vdot_block: the momentum-derivative block. For one spin per clock it computes
//   vdot_i = (beta * I_i) * f1(x_i) + (-x_i)
// where I_i is the local field from FUNC2 and f1 is FUNC1's approximation of
// the derivative of the smoothed sign. This is the right-hand side of
// dv/dt = beta * d(sgn x)/dx * I(sgn x) - x. Dataflow as in the source design:
// FUNC1 (4 clocks) in parallel with MULTI beta*I (1 clock, then delayed 3);
// a second MULTI forms the product; the Inverter produces -x (x delayed 4,
// then 1 clock); an ADDER2 adds the two. Latency 6 clocks, one element per
// clock. beta and a0..a2 are expected to be constant during a pass.
module vdot_block #(
  parameter int DW   = 16,
  parameter int FW   = 24,
  parameter int FRAC = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] x,
  input  logic signed [FW-1:0] field,
  input  logic signed [DW-1:0] beta,
  input  logic signed [DW-1:0] a0,
  input  logic signed [DW-1:0] a1,
  input  logic signed [DW-1:0] a2,
  output logic                 out_valid,
  output logic signed [FW-1:0] vdot
);
  localparam int LAT = 6;

  logic signed [DW-1:0] d;
  logic signed [FW-1:0] bi, bi_d [3], negx;
  logic signed [FW-2:0] force_t;  // one bit narrower so the final add cannot overflow
  logic signed [DW-1:0] x_d [4];
  logic [LAT-1:0]       vld;

  func1 #(.W(DW), .FRAC(FRAC)) u_func1 (.clk, .x, .a0, .a1, .a2, .d);
  multi #(.WA(DW), .WB(FW), .WO(FW), .FRAC(FRAC)) u_beta (.clk, .a(beta), .b(field), .p(bi));

  always_ff @(posedge clk) begin
    bi_d[0] <= bi;
    bi_d[1] <= bi_d[0];
    bi_d[2] <= bi_d[1];
    x_d[0]  <= x;
    for (int k = 1; k < 4; k++) x_d[k] <= x_d[k-1];
  end

  multi    #(.WA(DW), .WB(FW), .WO(FW-1), .FRAC(FRAC)) u_prod (.clk, .a(d), .b(bi_d[2]), .p(force_t));
  inverter #(.WI(DW), .WO(FW))                       u_inv  (.clk, .a(x_d[3]), .neg(negx));
  adder2   #(.W(FW))                                 u_add  (.clk, .a(FW'(force_t)), .b(negx), .sum(vdot));
  // |force_t| < 2^(FW-2) and |negx| <= 2^(DW-1), so the FW-bit sum never wraps

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], in_valid};
  end
  assign out_valid = vld[LAT-1];
endmodule

// func2: FUNC2, the local-field unit. For one row i of the coupling matrix it
// takes a slice of LANES couplings J_i,j and the signs of the matching x_j,
// forms J_i,j * sgn(x_j) (a MULTI by +-1, i.e. a conditional negation, one
// clock), sums the LANES products in ADDER32 (5 clocks), and adds acc_in in an
// ADDER2 (1 clock):
//   field = acc_in + sum_k J[k] * sgn_k,   sgn_k = -1 if sgn[k] else +1.
// For the first slice of a row acc_in is h_i; for later slices it is the
// partial field of the previous slice, so after ceil(n/LANES) slices the
// result is I_i = sum_j J_ij sgn(x_j) + h_i. Splitting rows into slices and
// chaining partial sums through the ADDER2 is this design's choice.
// Latency: 7 clocks from in_valid to out_valid; one slice per clock.
module func2 #(
  parameter int LANES = 32,
  parameter int JW    = 16,
  parameter int FW    = 24
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [LANES*JW-1:0]   j_row,
  input  logic [LANES-1:0]      sgn,
  input  logic signed [FW-1:0]  acc_in,
  output logic                  out_valid,
  output logic signed [FW-1:0]  field
);
  localparam int AW  = JW + 5;  // ADDER32 width: 32 terms of JW bits
  localparam int LAT = 7;

  logic signed [AW-1:0] prod [32];
  logic signed [AW-1:0] jsum;
  logic signed [FW-1:0] acc_d [6];
  logic [LAT-1:0]       vld;

  if (LANES != 32) begin : g_lanes_chk
    $error("func2: ADDER32 requires LANES == 32");
  end

  // MULTI by sgn(x_j): conditional negation, registered
  always_ff @(posedge clk) begin
    for (int k = 0; k < 32; k++) begin
      if (sgn[k]) prod[k] <= -AW'($signed(j_row[k*JW +: JW]));
      else        prod[k] <=  AW'($signed(j_row[k*JW +: JW]));
    end
  end

  adder32 #(.W(AW)) u_tree (.clk, .data(prod), .sum(jsum));

  // align acc_in with the tree output (1 + 5 clocks)
  always_ff @(posedge clk) begin
    acc_d[0] <= acc_in;
    for (int k = 1; k < 6; k++) acc_d[k] <= acc_d[k-1];
  end

  adder2 #(.W(FW)) u_acc (.clk, .a(FW'(jsum)), .b(acc_d[5]), .sum(field));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], in_valid};
  end
  assign out_valid = vld[LAT-1];
endmodule

// square: SQUARE, a registered fixed-point squarer. Computes (a*a) >> FRAC,
// i.e. the square in the same scale as the operand, saturated to WO bits.
// Latency one clock. Width, scale and saturation are this design's choices.
module square #(
  parameter int WI   = 16,
  parameter int WO   = 22,
  parameter int FRAC = 10
) (
  input  logic                 clk,
  input  logic signed [WI-1:0] a,
  output logic signed [WO-1:0] sq
);
  logic signed [2*WI-1:0] full;
  logic signed [63:0]     scaled;
  always_comb begin
    full   = a * a;
    scaled = 64'(full >>> FRAC);
    scaled = phia_pkg::sat_to(scaled, WO);
  end
  always_ff @(posedge clk) sq <= WO'(scaled);
endmodule

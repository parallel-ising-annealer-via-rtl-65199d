// multi: MULTI, a registered signed fixed-point multiplier. Both operands carry
// FRAC fraction bits; the product is shifted right by FRAC (arithmetic, i.e.
// rounding toward minus infinity) and saturated to WO bits. Latency one clock.
// Widths, rounding and saturation are this design's choices.
module multi #(
  parameter int WA   = 16,
  parameter int WB   = 24,
  parameter int WO   = 24,
  parameter int FRAC = 10
) (
  input  logic                 clk,
  input  logic signed [WA-1:0] a,
  input  logic signed [WB-1:0] b,
  output logic signed [WO-1:0] p
);
  logic signed [WA+WB-1:0] full;
  logic signed [63:0]      scaled;
  always_comb begin
    full   = a * b;
    scaled = 64'(full >>> FRAC);
    scaled = phia_pkg::sat_to(scaled, WO);
  end
  always_ff @(posedge clk) p <= WO'(scaled);
endmodule

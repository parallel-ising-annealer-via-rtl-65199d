// h_rom: the local-field memory (H-ROM), one JW-bit h_i per word. Read-only
// for the annealer, one registered read port (data one clock after the
// address); the write port is this design's addition for problem loading.
module h_rom #(
  parameter int N  = 200,
  parameter int JW = 16,
  localparam int AW = $clog2(N)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic signed [JW-1:0] wr_data,
  input  logic [AW-1:0]        rd_addr,
  output logic signed [JW-1:0] rd_data
);
  logic signed [JW-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_addr) < N) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule

// j_rom: the coupling memory (J-ROM). Row i of the n x n coupling matrix is
// cut into C = ceil(N/LANES) slices of LANES columns; word  c*N + i  holds
// J[i][c*LANES + k] in bits [k*JW +: JW] for k = 0..LANES-1. Columns past N in
// the last slice must be written as zero. Read-only for the annealer, with one
// registered read port (data one clock after the address); the write port is
// this design's addition so that a host can load a problem before a start.
module j_rom #(
  parameter int N     = 200,
  parameter int LANES = 32,
  parameter int JW    = 16,
  localparam int C     = (N + LANES - 1) / LANES,
  localparam int DEPTH = N * C,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_addr,
  input  logic [LANES*JW-1:0]   wr_data,
  input  logic [AW-1:0]         rd_addr,
  output logic [LANES*JW-1:0]   rd_data
);
  logic [LANES*JW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_addr) < DEPTH) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule

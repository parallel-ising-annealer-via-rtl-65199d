// momentum_rng: source of the random initial momenta. A 32-bit xorshift
// generator (x ^= x<<13; x ^= x>>17; x ^= x<<5) advances once per clock while
// `en` is high; its two 16-bit halves are shifted right arithmetically by
// V_SHIFT to give two uniform momenta per clock, r0 and r1, in
// [-2^(15-V_SHIFT), 2^(15-V_SHIFT)) LSBs (about [-1, 1) with 10 fraction bits
// and V_SHIFT = 5). Two values per clock let the initialisation state fill n
// momenta in about n/2 clocks. The generator type and the uniform
// distribution are this design's choices. `load` sets the seed (a zero seed
// is replaced by a fixed non-zero constant, since xorshift sticks at zero).
module momentum_rng #(
  parameter int DW      = 16,
  parameter int V_SHIFT = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [31:0]          seed,
  input  logic                 en,
  output logic signed [DW-1:0] r0,
  output logic signed [DW-1:0] r1
);
  localparam logic [31:0] DEFAULT_SEED = 32'h2545_F491;
  logic [31:0] st, nx;

  always_comb begin
    nx = st ^ (st << 13);
    nx = nx ^ (nx >> 17);
    nx = nx ^ (nx << 5);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    st <= DEFAULT_SEED;
    else if (load) st <= (seed == 32'd0) ? DEFAULT_SEED : seed;
    else if (en)   st <= nx;
  end

  assign r0 = DW'($signed(st[15:0])  >>> V_SHIFT);
  assign r1 = DW'($signed(st[31:16]) >>> V_SHIFT);
endmodule

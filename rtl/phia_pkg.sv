// phia_pkg: shared number formats, sizes and the controller state type of the
// parallel HMC Ising annealer.
//
// All continuous quantities (position x, momentum v, inverse temperature beta,
// step size eps, couplings J and fields h, FUNC1 coefficients) are 16-bit two's
// complement fixed point with FRAC = 10 fraction bits (Q5.10, range +-32).
// Local fields and momentum derivatives use FW = 24 bits with the same scale,
// energies use EW = 40 bits. These widths are this design's choice; the
// source design only states that it uses fixed-point arithmetic.
package phia_pkg;
  localparam int DW    = 16;  // x, v, beta, eps, coefficients
  localparam int FRAC  = 10;  // fraction bits of every fixed-point value
  localparam int JW    = 16;  // J_ij and h_i
  localparam int FW    = 24;  // local field I_i and vdot_i
  localparam int EW    = 40;  // energies and Hamiltonian
  localparam int LANES = 32;  // J columns handled per cycle (ADDER32 width)
  localparam int IW    = 16;  // iteration / run counters

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [FW-1:0] field_t;
  typedef logic signed [EW-1:0] energy_t;

  // The five controller states of the annealer plus idle and done.
  typedef enum logic [2:0] {
    ST_IDLE   = 3'd0,
    ST_INIT   = 3'd1,  // 1: initialisation (fresh momenta)
    ST_VFIRST = 3'd2,  // 2: v update of the first iteration
    ST_ITER   = 3'd3,  // 3: remaining leapfrog iterations
    ST_ACCEPT = 3'd4,  // 4: acceptance and temperature adjustment
    ST_BEST   = 3'd5,  // 5: keep best result, stop test
    ST_DONE   = 3'd6
  } state_e;

  // Saturate a wide signed value into an n-bit signed range (n <= 64).
  function automatic logic signed [63:0] sat_to(input logic signed [63:0] v, input int n);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (n - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (n - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction
endpackage

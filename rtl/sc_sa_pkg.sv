// sc_sa_pkg: constants and types shared by the stochastic-computing simulated
// annealing (SC-SA) core.
//
// The core solves Ising problems: N spins sigma_i in {-1,+1}, biases h_i and
// couplings J_ij. A spin is one bit (1 = +1, 0 = -1). A coupling is a JW-bit
// two's-complement number; the MAX-CUT benchmarks the core is sized for use
// {-1, 0, +1}, so JW = 2. The local field I_i, the up-down counter value
// Itanh_i and the integer part of the pseudo-inverse temperature I0 share one
// signed width IW; I0 itself is held in unsigned fixed point with I0_FRAC
// fraction bits so that a non-integer 1/beta can be applied.
//
// The default of 2000 spins is the size of the K2000 complete graph. LANES,
// the number of couplings combined per clock, and all widths are choices of
// this design, not of the algorithm; so is GATES, the number of spin gates
// working side by side (1 by default; N for one gate per spin).
package sc_sa_pkg;

  parameter int unsigned N_SPINS = 2000;  // spins (K2000)
  parameter int unsigned DEF_LANES = 100; // couplings summed per clock
  parameter int unsigned DEF_GATES = 1;   // spin gates working in parallel
  parameter int unsigned JW      = 2;     // coupling width, values -1..+1
  parameter int unsigned IW      = 16;    // local field / Itanh / I0 width
  parameter int unsigned I0_FRAC = 8;     // fraction bits of I0
  parameter int unsigned CYW     = 32;    // annealing cycle counter width

  // Run configuration, latched by the core when it is started.
  typedef struct packed {
    logic [15:0]          n_chunks;    // problem size n = n_chunks * LANES spins
    logic [CYW-1:0]       num_cycles;  // annealing cycles to run (0 is taken as 1)
    logic [15:0]          tau;         // cycles between two I0 steps (0 is taken as 1)
    logic [IW+I0_FRAC-1:0] i0_min;     // I0min, unsigned fixed point
    logic [IW+I0_FRAC-1:0] i0_max;     // I0max, unsigned fixed point
    logic [15:0]          inv_beta;    // 1/beta, unsigned Q8.8 (2.0 = 16'h0200)
    logic [7:0]           n_rnd;       // noise magnitude
    logic [31:0]          seed;        // noise generator seed (0 is taken as 1)
  } sc_sa_cfg_t;

  // Galois form of x^32 + x^22 + x^2 + x + 1, a maximal-length polynomial.
  parameter logic [31:0] LFSR_TAPS = 32'h8020_0003;

endpackage

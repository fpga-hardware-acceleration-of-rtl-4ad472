// ising_pkg: types, constants and helper functions shared by the Ising
// Metropolis accelerator.
//
// The Boltzmann factors exp(-beta*dE) are 12-bit unsigned fixed-point
// fractions (value/4096), as in the paper's 12-bit lookup table. The local
// energy eps = S0*(S_L+S_T+S_R+S_B) takes the five values -4,-2,0,2,4 and is
// coded as a 3-bit table index (eps+4)/2. Seeds of the per-spin 12-bit LFSRs
// are this design's own choice: seed(i) = (i*1567) mod 4095, distinct for
// every spin block index below 4095 and never the all-ones lock-up state of
// an XNOR LFSR.
package ising_pkg;

  localparam int unsigned LUT_W     = 12;  // word length of exp(-beta*dE)
  localparam int unsigned LUT_N     = 5;   // entries: eps = -4,-2,0,2,4

  typedef logic [LUT_W-1:0] boltz_t;
  typedef boltz_t [LUT_N-1:0] boltz_table_t;   // index = (eps+4)/2
  typedef logic [2:0] eps_idx_t;

  // Controller phases.
  typedef enum logic [1:0] {
    PH_IDLE  = 2'd0,   // waiting for start, host may read the lattice
    PH_INIT  = 2'd1,   // writing random initial spins
    PH_RUN   = 2'd2,   // Metropolis sweeps
    PH_DRAIN = 2'd3    // last write-back of the run
  } phase_e;

  // Seed of the local LFSR12 of spin block i.
  function automatic logic [11:0] lfsr12_seed(input int unsigned i);
    return 12'((i * 1567) % 4095);
  endfunction

endpackage

// janus_pkg: constants and types shared by the spin-glass simulation processor.
//
// Spins and couplings are stored as bits: S = (1 - sigma)/2 and Jhat = (1 - J)/2,
// so a 1 bit means sigma = -1 (or J = -1). The heat-bath probability table is
// addressed by F = sum_m (Jhat_km xor S_m), which takes the 7 values 0..6 and
// relates to the local field by phi = 6 - 2F. Random numbers and table entries
// are 32-bit unsigned fractions of 2^32. The Parisi-Rapuano lags (24, 55, 61)
// are the usual ones for this generator; the 62-word state follows from the
// largest lag. Fixed-point formats of the parallel-tempering arithmetic (16
// fractional bits) and the host-port register map are this design's choices.
package janus_pkg;

  localparam int unsigned RAND_W    = 32;   // width of one random number
  localparam int unsigned NNB       = 6;    // nearest neighbours in 3D
  localparam int unsigned LUT_DEPTH = 7;    // F = 0..6
  localparam int unsigned LUT_AW    = 3;

  // Parisi-Rapuano: I(k) = I(k-24) + I(k-55), r(k) = I(k) xor I(k-61)
  localparam int unsigned PR_LEN = 62;
  localparam int unsigned PR_A   = 24;
  localparam int unsigned PR_B   = 55;
  localparam int unsigned PR_C   = 61;

  // Fixed point used for beta and ln r in the tempering decision.
  localparam int unsigned FIX_FRAC = 16;

  // Neighbour order used by the gather network and the update cells.
  typedef enum logic [2:0] {
    NB_XM = 3'd0, NB_XP = 3'd1, NB_YM = 3'd2, NB_YP = 3'd3, NB_ZM = 3'd4, NB_ZP = 3'd5
  } nb_dir_e;

  // Targets of the host (I/O processor) port.
  typedef enum logic [3:0] {
    IO_SPIN_P  = 4'd0,  // addr = word*R + row, one lattice row
    IO_SPIN_Q  = 4'd1,
    IO_JX      = 4'd2,  // couplings, same addressing as spins
    IO_JY      = 4'd3,
    IO_JZ      = 4'd4,
    IO_LUT     = 4'd5,  // addr = temperature*8 + F
    IO_BETA    = 4'd6,  // addr = temperature, unsigned 16.16
    IO_BETAIDX = 4'd7,  // addr = configuration, data = temperature index
    IO_SEED    = 4'd8,  // addr = generator*64 + register
    IO_ENERGY  = 4'd9   // read only, addr = configuration
  } io_sel_e;

endpackage

// bernoulli_pkg: widths shared by the Bernoulli-map keystream generator.
//
// The chaotic state of each generator is a 32-bit unsigned fixed-point
// number x in [0, 2^32), standing for x/2^32 in [0, 1). The feedback factor
// mu is an 8-bit unsigned fraction mu/2^8, so 8'hAA means 0.6640625. Each
// state word is cut into four 8-bit sequences and the two generators give
// eight of them, which are XORed into one 8-bit keystream byte per clock.
// All of these sizes are the ones the design was published with; only the
// package layout and the type names are this implementation's own.
package bernoulli_pkg;

  // Width of the map state (bits of the PRNG register).
  parameter int unsigned STATE_W = 32;
  // Width of the feedback factor mu.
  parameter int unsigned MU_W    = 8;
  // Width of one separated sequence and of the keystream.
  parameter int unsigned SEQ_W   = 8;
  // Sequences per state word (32 / 8).
  parameter int unsigned N_SEQ   = STATE_W / SEQ_W;
  // Number of generators whose sequences are combined.
  parameter int unsigned N_PRNG  = 2;

  typedef logic [STATE_W-1:0] state_t;
  typedef logic [MU_W-1:0]    mu_t;
  typedef logic [SEQ_W-1:0]   seq_t;

endpackage

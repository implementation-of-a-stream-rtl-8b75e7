// keystream_xor_array: sequence separation and the 56-gate XOR array.
//
// Each 32-bit PRNG word is separated into four 8-bit sequences: first into
// a high half floor(x / 2^16) and a low half x mod 2^16, then each half the
// same way into bytes. With two generators this gives eight bytes. Bit k of
// the keystream byte is the XOR of bit k of all eight bytes, formed by a
// chain of 7 two-input XOR gates: the four bytes of the first word, most
// significant byte first, then the four of the second word. Eight chains
// make 56 gates. Numbering the word bits 1..32 from the most significant,
// keystream bit j (1 = MSB) combines bits j, j+8, j+16, j+24 of each word.
//
// Interface: seq_a_i, seq_b_i (the two PRNG words) in, ks_o (keystream
// byte) out; purely combinational.
// The separation and gate arrangement are the published ones; writing the
// separation as floor/mod on the word (which synthesizes to wiring) keeps
// the published formulation visible.
module keystream_xor_array
  import bernoulli_pkg::*;
(
  input  state_t seq_a_i,
  input  state_t seq_b_i,
  output seq_t   ks_o
);

  localparam int unsigned HALF_W = STATE_W / 2;
  localparam int unsigned N_BYTES = N_PRNG * N_SEQ;   // 8

  // Separation by floor and mod, applied twice.
  function automatic void separate(input state_t x,
                                   output seq_t b [N_SEQ]);
    logic [HALF_W-1:0] hi, lo;
    hi   = HALF_W'(x / (STATE_W'(1) << HALF_W));
    lo   = HALF_W'(x % (STATE_W'(1) << HALF_W));
    b[0] = SEQ_W'(hi / (HALF_W'(1) << SEQ_W));
    b[1] = SEQ_W'(hi % (HALF_W'(1) << SEQ_W));
    b[2] = SEQ_W'(lo / (HALF_W'(1) << SEQ_W));
    b[3] = SEQ_W'(lo % (HALF_W'(1) << SEQ_W));
  endfunction

  seq_t seq_a [N_SEQ];
  seq_t seq_b [N_SEQ];
  seq_t seqs  [N_BYTES];

  always_comb begin
    separate(seq_a_i, seq_a);
    separate(seq_b_i, seq_b);
    for (int i = 0; i < int'(N_SEQ); i++) begin
      seqs[i]         = seq_a[i];
      seqs[N_SEQ + i] = seq_b[i];
    end
  end

  // chain[s][k]: bit k after s gates of its column.
  logic [SEQ_W-1:0] chain [N_BYTES];

  assign chain[0] = seqs[0];
  for (genvar s = 1; s < N_BYTES; s++) begin : g_stage
    for (genvar k = 0; k < SEQ_W; k++) begin : g_bit
      assign chain[s][k] = chain[s-1][k] ^ seqs[s][k];
    end
  end

  assign ks_o = chain[N_BYTES-1];

endmodule

// bernoulli_stream_cipher: keystream generator of the Bernoulli-map cipher.
//
// Two bernoulli_prng generators, each with its own initial value and
// feedback factor, step together on the system clock. Their 32-bit words
// are separated into eight bytes and folded by keystream_xor_array into one
// keystream byte. A shared close_i pulse closes both feedback loops. The
// keystream is meant to be XORed with the data to be enciphered; that
// combining gate is not part of this block.
//
// Example (published simulation): seeds 32'hAAAAAAAA / 32'hBBBBBBBB and
// factors 8'hAA / 8'hBB give keystream bytes 70, 41, A1, AD, E3, 71, 5F, C2.
//
// Interface: clk_i, rst_ni (asynchronous, active low), en_i (advance both
// generators), close_i (close both loops), seed1_i/mu1_i and seed2_i/mu2_i.
// Out: ks_o, the keystream byte, and x1_o/x2_o, the two generator words,
// which a user may watch; closed_o is high once both loops are closed.
// Timing: ks_o is combinational from the two generator registers, so a new
// byte appears after each enabled clock edge, one byte per clock; after
// reset ks_o is 0. The structure is the published one; the enable, the
// exported words and the reset are this implementation's choices.
module bernoulli_stream_cipher
  import bernoulli_pkg::*;
(
  input  logic   clk_i,
  input  logic   rst_ni,
  input  logic   en_i,
  input  logic   close_i,
  input  state_t seed1_i,
  input  mu_t    mu1_i,
  input  state_t seed2_i,
  input  mu_t    mu2_i,
  output seq_t   ks_o,
  output state_t x1_o,
  output state_t x2_o,
  output logic   closed_o
);

  logic closed1, closed2;

  bernoulli_prng #(.STATE_W(STATE_W), .MU_W(MU_W)) u_prng1 (
    .clk_i    (clk_i),
    .rst_ni   (rst_ni),
    .en_i     (en_i),
    .close_i  (close_i),
    .seed_i   (seed1_i),
    .mu_i     (mu1_i),
    .x_o      (x1_o),
    .closed_o (closed1)
  );

  bernoulli_prng #(.STATE_W(STATE_W), .MU_W(MU_W)) u_prng2 (
    .clk_i    (clk_i),
    .rst_ni   (rst_ni),
    .en_i     (en_i),
    .close_i  (close_i),
    .seed_i   (seed2_i),
    .mu_i     (mu2_i),
    .x_o      (x2_o),
    .closed_o (closed2)
  );

  keystream_xor_array u_xor_array (
    .seq_a_i (x1_o),
    .seq_b_i (x2_o),
    .ks_o    (ks_o)
  );

  assign closed_o = closed1 & closed2;

endmodule

// gen_factor: the generalization factor of the modified Bernoulli map.
//
// Computes 2^STATE_W * (1 - mu) / 2 for the fraction mu = mu_i / 2^MU_W,
// the constant term that the map adds after its multiplier. With integer
// operands this is exactly (2^MU_W - mu_i) * 2^(STATE_W - MU_W - 1): one
// subtraction and a fixed left shift, no multiplier. For mu_i = 8'hAA the
// result is 32'h2B000000. The low STATE_W - MU_W - 1 output bits (23 of 32)
// are therefore always zero; they are kept so the port has the full state
// width the adder expects.
//
// Interface: mu_i in, gf_o out; purely combinational, no clock.
// The formula is the published one; reducing it to subtract-and-shift is
// this implementation's choice.
module gen_factor #(
  parameter int unsigned STATE_W = bernoulli_pkg::STATE_W,
  parameter int unsigned MU_W    = bernoulli_pkg::MU_W
) (
  input  logic [MU_W-1:0]    mu_i,
  output logic [STATE_W-1:0] gf_o
);

  // 2^MU_W - mu needs one bit more than mu (mu = 0 gives 2^MU_W).
  logic [MU_W:0] one_minus_mu;

  always_comb begin
    one_minus_mu = (MU_W+1)'(1 << MU_W) - {1'b0, mu_i};
    gf_o         = STATE_W'(one_minus_mu) << (STATE_W - MU_W - 1);
  end

endmodule

// bernoulli_map: one iteration of the digital modified Bernoulli map.
//
//   x_next = floor( ((2*x) mod 2^STATE_W) * mu / 2^MU_W ) + gf(mu)
//
// The datapath follows the published block diagram stage by stage:
//   * "Mult x2": the state is shifted left by one and the bit that would be
//     the 33rd is thrown away. This is the fold of the map: for x >= 2^31
//     it subtracts 2^32.
//   * "Mult xmu": the 32-bit result times the 8-bit mu gives a 40-bit
//     product.
//   * the 8 least significant product bits are discarded, which divides by
//     2^MU_W (mu is a fraction).
//   * "Sumador": the remaining 32 bits are added to the generalization
//     factor from gen_factor.
// The sum never carries out of 32 bits: the scaled product is below
// mu*2^24 and the factor is (256-mu)*2^23, so the total stays under
// (256+mu)*2^23 < 2^32. An assertion checks this.
// Bit 31 of x_i and the 8 low product bits are unused on purpose: they are
// the thrown-away overflow bit and the discarded fraction.
//
// The published piecewise formula writes the upper branch as
// 2*mu*x - 2^32 + gf; the published datapath (double, drop the overflow,
// then multiply by mu) computes mu*(2*x - 2^32) + gf instead. This module
// follows the datapath, which is the form that reproduces the published
// simulation values.
//
// Interface: x_i (state), mu_i (factor) in, x_o (next state) out; purely
// combinational. The register closing the loop is in bernoulli_prng.
module bernoulli_map #(
  parameter int unsigned STATE_W = bernoulli_pkg::STATE_W,
  parameter int unsigned MU_W    = bernoulli_pkg::MU_W
) (
  input  logic [STATE_W-1:0] x_i,
  input  logic [MU_W-1:0]    mu_i,
  output logic [STATE_W-1:0] x_o
);

  logic [STATE_W-1:0]      doubled;   // Mult x2, overflow bit thrown away
  logic [STATE_W+MU_W-1:0] product;   // Mult xmu, 40 bits
  logic [STATE_W-1:0]      scaled;    // product without its 8 LSBs
  logic [STATE_W-1:0]      gf;        // generalization factor
  logic [STATE_W:0]        sum;       // Sumador, with its carry kept

  gen_factor #(.STATE_W(STATE_W), .MU_W(MU_W)) u_gen_factor (
    .mu_i (mu_i),
    .gf_o (gf)
  );

  always_comb begin
    doubled = {x_i[STATE_W-2:0], 1'b0};
    product = (STATE_W+MU_W)'(doubled) * (STATE_W+MU_W)'(mu_i);
    scaled  = product[STATE_W+MU_W-1:MU_W];
    sum     = {1'b0, scaled} + {1'b0, gf};
    x_o     = sum[STATE_W-1:0];
  end

  // The adder cannot overflow for any mu (see the header).
  always_comb begin
    assert (sum[STATE_W] == 1'b0)
      else $error("bernoulli_map: adder overflow");
  end

endmodule

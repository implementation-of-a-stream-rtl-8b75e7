// bernoulli_prng: 32-bit pseudo-random generator built on Bernoulli's map.
//
// The state register ("Registro", parallel in / parallel out) holds x. On
// each rising clock edge with en_i high it loads bernoulli_map(x_sel, mu),
// where x_sel is the initial value seed_i while the loop is still open and
// the register itself once loop_closure has closed it. Thus the first
// enabled edge loads f(seed); if close_i is high on that same edge the loop
// closes and the next edges load f(f(seed)), f(f(f(seed))) and so on, one
// new word per enabled clock. While close_i has not yet been given, every
// enabled edge reloads f(seed).
//
// Example (published simulation): seed 32'hAAAAAAAA, mu 8'hAA gives
// 63AAAAA9, AF5EAAA8, 69E9BAA7, B7AA6BE5, 74EE574C, C64C8BF0, 885DA9DA.
//
// Interface: clk_i, rst_ni (asynchronous, active low; clears the register
// to 0 and opens the loop), en_i (step enable), close_i (close the loop,
// counted only on an enabled edge, so it can never close before the first
// operation), seed_i, mu_i; x_o is the register, closed_o the loop state.
// Latency: x_o shows a new word one clock after each enabled edge is
// sampled, i.e. at a rate of one word per clock.
// The datapath and register follow the published design; reset value,
// reset style and the step enable are this implementation's choices.
module bernoulli_prng #(
  parameter int unsigned STATE_W = bernoulli_pkg::STATE_W,
  parameter int unsigned MU_W    = bernoulli_pkg::MU_W
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               en_i,
  input  logic               close_i,
  input  logic [STATE_W-1:0] seed_i,
  input  logic [MU_W-1:0]    mu_i,
  output logic [STATE_W-1:0] x_o,
  output logic               closed_o
);

  logic [STATE_W-1:0] x_sel;
  logic [STATE_W-1:0] x_next;

  loop_closure #(.STATE_W(STATE_W)) u_loop_closure (
    .clk_i    (clk_i),
    .rst_ni   (rst_ni),
    .close_i  (close_i & en_i),
    .seed_i   (seed_i),
    .fb_i     (x_o),
    .x_o      (x_sel),
    .closed_o (closed_o)
  );

  bernoulli_map #(.STATE_W(STATE_W), .MU_W(MU_W)) u_map (
    .x_i  (x_sel),
    .mu_i (mu_i),
    .x_o  (x_next)
  );

  // Registro
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)   x_o <= '0;
    else if (en_i) x_o <= x_next;
  end

endmodule

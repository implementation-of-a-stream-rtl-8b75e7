// loop_closure: feedback-loop closing flip-flop and input multiplexer.
//
// A PRNG has to start from an externally supplied initial value and then
// feed its own output back. A D flip-flop whose Q, once set, stays at one
// selects between the two: while Q is 0 the multiplexer passes the initial
// value (seed_i), afterwards the fed-back state (fb_i). Only a reset clears
// Q again, which opens the loop for a new initial value.
//
// Interface: clk_i, rst_ni (asynchronous, active low), close_i (sets the
// flip-flop at the next rising clock edge), seed_i, fb_i in; x_o (the
// selected word, combinational) and closed_o (the flip-flop's Q) out.
// The flip-flop and the multiplexer are the published structure; using a
// synchronous set-enable in the system clock domain, in place of a
// flip-flop clocked by its own pulse, is this implementation's choice.
module loop_closure #(
  parameter int unsigned STATE_W = bernoulli_pkg::STATE_W
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               close_i,
  input  logic [STATE_W-1:0] seed_i,
  input  logic [STATE_W-1:0] fb_i,
  output logic [STATE_W-1:0] x_o,
  output logic               closed_o
);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      closed_o <= 1'b0;
    else if (close_i) closed_o <= 1'b1;
  end

  always_comb x_o = closed_o ? fb_i : seed_i;

  // Once closed, the loop stays closed until the next reset.
  a_sticky: assert property (@(posedge clk_i) disable iff (!rst_ni)
                             closed_o |=> closed_o)
    else $error("loop_closure: flip-flop cleared without reset");

endmodule

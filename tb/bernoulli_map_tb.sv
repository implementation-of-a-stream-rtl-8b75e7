// bernoulli_map_tb: checks one map iteration.
//
// Drives the published PRNG sequence (seed AAAAAAAA, mu AA) through the
// combinational map word by word, plus the first words of the second
// published generator (seed BBBBBBBB, mu BB), then 20000 random states and
// factors including both edges of the fold (x = 2^31-1, 2^31) against the
// piecewise 64-bit reference model.
module bernoulli_map_tb;
  import bernoulli_ref_pkg::*;
  logic [31:0] x, y;
  logic [7:0]  mu;
  int checks = 0, failures = 0;

  bernoulli_map dut (.x_i(x), .mu_i(mu), .x_o(y));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] exp_v, input string what);
    #1;
    checks++;
    if (y !== exp_v) begin
      failures++;
      $display("%s: x=%h mu=%h y=%h expected %h", what, x, mu, y, exp_v);
    end
  endtask

  initial begin
    // Published sequence.
    x = 32'hAAAAAAAA; mu = 8'hAA;
    for (int i = 0; i < 7; i++) begin
      check(FIG_PRNG[i], "published sequence");
      x = y;
    end
    // Second generator of the keystream example.
    x = 32'hBBBBBBBB; mu = 8'hBB; check(32'h79C44443, "second generator");
    x = 32'h79C44443;             check(32'hD464BBB9, "second generator");
    // Fold edges and extremes.
    for (int m = 0; m < 256; m += 51) begin
      mu = 8'(m);
      x = 32'h7FFFFFFF; check(ref_step(x, mu), "edge below fold");
      x = 32'h80000000; check(ref_step(x, mu), "edge at fold");
      x = 32'hFFFFFFFF; check(ref_step(x, mu), "top");
      x = 32'h00000000; check(ref_step(x, mu), "zero");
    end
    // Random.
    for (int i = 0; i < 20000; i++) begin
      x  = $urandom;
      mu = 8'($urandom);
      check(ref_step(x, mu), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

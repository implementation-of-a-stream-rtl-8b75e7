// bernoulli_prng_tb: checks one Bernoulli-map generator cycle by cycle.
//
// 1. After reset the register is 0 and the loop is open.
// 2. A close pulse given while the generator is not enabled is ignored.
// 3. With the loop open every enabled edge reloads f(seed).
// 4. The published run: seed AAAAAAAA, mu AA, close on the first enabled
//    edge; the seven published words must follow on seven consecutive
//    clocks (one word per clock).
// 5. Random seeds, factors and enable patterns against the reference
//    model, with a hold check on every disabled clock.
module bernoulli_prng_tb;
  import bernoulli_ref_pkg::*;
  logic        clk = 1'b0, rst_n = 1'b0, en = 1'b0, close = 1'b0;
  logic [31:0] seed = '0, x;
  logic [7:0]  mu = '0;
  logic        closed;
  int checks = 0, failures = 0;
  int cycle = 0;

  bernoulli_prng dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .close_i(close),
                      .seed_i(seed), .mu_i(mu), .x_o(x), .closed_o(closed));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    wait (cycle == 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] exp_x, input logic exp_c, input string what);
    checks++;
    if (x !== exp_x || closed !== exp_c) begin
      failures++;
      $display("%s (cycle %0d): x=%h closed=%b expected %h %b",
               what, cycle, x, closed, exp_x, exp_c);
    end
  endtask

  task automatic do_reset();
    @(negedge clk) rst_n = 1'b0; en = 1'b0; close = 1'b0;
    @(negedge clk) check(32'h0, 1'b0, "reset");
    rst_n = 1'b1;
  endtask

  initial begin
    logic [31:0] model;
    int start;
    @(negedge clk);
    do_reset();
    // 2. close without enable is ignored.
    seed = 32'hAAAAAAAA; mu = 8'hAA; close = 1'b1;
    @(negedge clk) check(32'h0, 1'b0, "close while disabled");
    close = 1'b0;
    // 3. open loop reloads f(seed).
    en = 1'b1;
    repeat (4) @(negedge clk) check(FIG_PRNG[0], 1'b0, "open loop");
    // 4. published run from reset.
    do_reset();
    seed = 32'hAAAAAAAA; mu = 8'hAA; en = 1'b1; close = 1'b1;
    start = cycle;
    @(negedge clk) close = 1'b0;
    check(FIG_PRNG[0], 1'b1, "published word 1");
    for (int i = 1; i < 7; i++) begin
      @(negedge clk) check(FIG_PRNG[i], 1'b1, "published word");
    end
    checks++;
    if (cycle - start != 7) begin
      failures++;
      $display("7 words took %0d clocks", cycle - start);
    end
    // 5. random runs.
    for (int run = 0; run < 50; run++) begin
      do_reset();
      seed = $urandom; mu = 8'($urandom);
      en = 1'b1; close = 1'b1;
      model = ref_step(seed, mu);
      @(negedge clk) close = 1'b0;
      check(model, 1'b1, "random first");
      for (int i = 0; i < 400; i++) begin
        en = 1'($urandom % 4 != 0);
        seed = $urandom;  // must be ignored once the loop is closed
        if (en) model = ref_step(model, mu);
        @(negedge clk) check(model, 1'b1, en ? "random step" : "random hold");
      end
      en = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// loop_closure_tb: checks the loop-closing flip-flop and multiplexer.
//
// After reset the multiplexer must pass the initial value whatever the
// feedback word is; a single close pulse must switch it to the feedback
// word on the next clock and keep it there when the pulse is gone and for
// many random close values; a reset must open the loop again.
module loop_closure_tb;
  logic        clk = 1'b0, rst_n = 1'b0, close = 1'b0;
  logic [31:0] seed, fb, x;
  logic        closed;
  int checks = 0, failures = 0;
  int cycle = 0;

  loop_closure dut (.clk_i(clk), .rst_ni(rst_n), .close_i(close),
                    .seed_i(seed), .fb_i(fb), .x_o(x), .closed_o(closed));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    wait (cycle == 2000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_sel(input logic want_closed, input string what);
    checks++;
    if (closed !== want_closed || x !== (want_closed ? fb : seed)) begin
      failures++;
      $display("%s: closed=%b x=%h seed=%h fb=%h", what, closed, x, seed, fb);
    end
  endtask

  initial begin
    seed = 32'hAAAAAAAA; fb = 32'h12345678;
    repeat (2) @(posedge clk);
    #1 expect_sel(1'b0, "in reset");
    rst_n = 1'b1;
    // Loop open for a while: seed passes, feedback ignored.
    for (int i = 0; i < 20; i++) begin
      @(posedge clk); #1;
      fb = $urandom; seed = $urandom; #1;
      expect_sel(1'b0, "open");
    end
    // One close pulse.
    @(negedge clk) close = 1'b1;
    @(negedge clk) close = 1'b0;
    expect_sel(1'b1, "just closed");
    for (int i = 0; i < 50; i++) begin
      @(negedge clk);
      fb = $urandom; seed = $urandom; close = 1'($urandom); #1;
      expect_sel(1'b1, "stays closed");
    end
    close = 1'b0;
    // Reset reopens.
    @(negedge clk) rst_n = 1'b0;
    #1 expect_sel(1'b0, "reset reopens");
    @(negedge clk) rst_n = 1'b1;
    @(negedge clk) #1 expect_sel(1'b0, "open after reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

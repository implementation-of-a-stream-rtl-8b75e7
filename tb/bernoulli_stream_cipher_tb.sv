// bernoulli_stream_cipher_tb: end-to-end test of the keystream generator.
//
// Runs the top at its default sizes. First the published keystream example
// (seeds AAAAAAAA/BBBBBBBB, factors AA/BB): the eight published bytes must
// come out on eight consecutive clocks after reset is released with close
// high on the first enabled edge. Then random sessions, each starting with
// a reset and new seeds and factors, some with the loop held open for a
// few clocks, random enable stalls and, in some sessions, a change of both
// factors in the middle of the run. Every clock the keystream byte and
// both generator words are compared with the reference model.
// Mechanisms counted, each of which must occur: loop closure, open-loop
// reload of the initial value, enable stall, reseed by reset, mid-run
// change of mu.
module bernoulli_stream_cipher_tb;
  import bernoulli_ref_pkg::*;
  logic        clk = 1'b0, rst_n = 1'b0, en = 1'b0, close = 1'b0;
  logic [31:0] seed1 = '0, seed2 = '0, x1, x2;
  logic [7:0]  mu1 = '0, mu2 = '0, ks;
  logic        closed;
  int checks = 0, failures = 0;
  int cycle = 0;
  int n_close = 0, n_open_reload = 0, n_stall = 0, n_reseed = 0, n_mu_change = 0;

  bernoulli_stream_cipher dut (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .close_i(close),
    .seed1_i(seed1), .mu1_i(mu1), .seed2_i(seed2), .mu2_i(mu2),
    .ks_o(ks), .x1_o(x1), .x2_o(x2), .closed_o(closed));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    wait (cycle == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] m1, m2;
  logic        mclosed;

  task automatic check(input string what);
    checks++;
    if (x1 !== m1 || x2 !== m2 || ks !== ref_ks(m1, m2) || closed !== mclosed) begin
      failures++;
      $display("%s (cycle %0d): ks=%h x1=%h x2=%h closed=%b expected %h %h %h %b",
               what, cycle, ks, x1, x2, closed, ref_ks(m1, m2), m1, m2, mclosed);
    end
  endtask

  task automatic do_reset();
    @(negedge clk) rst_n = 1'b0; en = 1'b0; close = 1'b0;
    m1 = '0; m2 = '0; mclosed = 1'b0;
    @(negedge clk) check("reset");
    checks++;
    if (ks !== 8'h00) begin
      failures++;
      $display("keystream after reset %h", ks);
    end
    rst_n = 1'b1;
    n_reseed++;
  endtask

  // One clock with the current inputs, advancing the model alongside.
  task automatic step(input string what);
    logic [31:0] s1, s2;
    if (en) begin
      s1 = mclosed ? m1 : seed1;
      s2 = mclosed ? m2 : seed2;
      if (!mclosed) n_open_reload++;
      m1 = ref_step(s1, mu1);
      m2 = ref_step(s2, mu2);
      if (close && !mclosed) begin
        mclosed = 1'b1;
        n_close++;
      end
    end else begin
      n_stall++;
    end
    @(negedge clk) check(what);
  endtask

  initial begin
    int start;
    @(negedge clk);
    // Published example.
    do_reset();
    seed1 = 32'hAAAAAAAA; seed2 = 32'hBBBBBBBB; mu1 = 8'hAA; mu2 = 8'hBB;
    en = 1'b1; close = 1'b1;
    start = cycle;
    for (int i = 0; i < 8; i++) begin
      step("published");
      close = 1'b0;
      checks++;
      if (ks !== FIG_KS[i]) begin
        failures++;
        $display("published byte %0d: %h expected %h", i, ks, FIG_KS[i]);
      end
    end
    checks++;
    if (cycle - start != 8) begin
      failures++;
      $display("8 keystream bytes took %0d clocks", cycle - start);
    end
    // Random sessions.
    for (int s = 0; s < 40; s++) begin
      int open_len, change_at;
      do_reset();
      seed1 = $urandom; seed2 = $urandom;
      mu1 = 8'($urandom); mu2 = 8'($urandom);
      open_len  = $urandom % 4;
      change_at = (s % 3 == 0) ? 100 + $urandom % 100 : -1;
      en = 1'b1; close = 1'b0;
      for (int i = 0; i < open_len; i++) step("open loop");
      close = 1'b1;
      for (int i = 0; i < 500; i++) begin
        if (i == change_at) begin
          mu1 = 8'($urandom); mu2 = 8'($urandom);
          n_mu_change++;
        end
        step("run");
        en = 1'($urandom % 5 != 0);
        close = 1'($urandom);
        seed1 = $urandom; seed2 = $urandom;
      end
    end
    $display("mechanisms: close=%0d open_reload=%0d stall=%0d reseed=%0d mu_change=%0d",
             n_close, n_open_reload, n_stall, n_reseed, n_mu_change);
    checks++; if (n_close == 0)       begin failures++; $display("no loop closure"); end
    checks++; if (n_open_reload == 0) begin failures++; $display("no open-loop reload"); end
    checks++; if (n_stall == 0)       begin failures++; $display("no stall"); end
    checks++; if (n_reseed == 0)      begin failures++; $display("no reseed"); end
    checks++; if (n_mu_change == 0)   begin failures++; $display("no mu change"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// gen_factor_tb: exhaustive check of the generalization factor.
//
// For all 256 values of mu the output is compared with
// floor(2^32 * (256 - mu) / 512), computed in 64-bit integers, and the
// published example (mu = 8'hAA gives 32'h2B000000) is checked by name.
module gen_factor_tb;
  logic [7:0]  mu;
  logic [31:0] gf;
  int checks = 0, failures = 0;

  gen_factor dut (.mu_i(mu), .gf_o(gf));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 256; m++) begin
      longint unsigned exp_v;
      mu = 8'(m);
      #1;
      exp_v = ((64'd1 << 32) * (64'd256 - 64'(m))) / 64'd512;
      checks++;
      if (64'(gf) != exp_v) begin
        failures++;
        $display("mu=%0d gf=%h expected %h", m, gf, exp_v);
      end
    end
    mu = 8'hAA; #1;
    checks++;
    if (gf != 32'h2B000000) begin
      failures++;
      $display("mu=AA gf=%h expected 2B000000", gf);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

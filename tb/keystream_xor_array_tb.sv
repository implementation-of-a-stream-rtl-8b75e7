// keystream_xor_array_tb: checks the separation and the XOR array.
//
// Uses the generator word pairs of the published keystream example (their
// XOR bytes are the published keystream), single-bit inputs that must
// light exactly the keystream bit of their column, and 20000 random word
// pairs against the byte-wise reference.
module keystream_xor_array_tb;
  import bernoulli_ref_pkg::*;
  logic [31:0] a, b;
  logic [7:0]  z;
  int checks = 0, failures = 0;

  keystream_xor_array dut (.seq_a_i(a), .seq_b_i(b), .ks_o(z));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [7:0] exp_v, input string what);
    #1;
    checks++;
    if (z !== exp_v) begin
      failures++;
      $display("%s: a=%h b=%h z=%h expected %h", what, a, b, z, exp_v);
    end
  endtask

  // Words of the two generators in the published keystream example.
  localparam logic [31:0] WA [8] = '{32'h63AAAAA9, 32'hAF5EAAA8, 32'h69E9BAA7,
    32'hB7AA6BE5, 32'h74EE574C, 32'hC64C8BF0, 32'h885DA9DA, 32'h361C6595};
  localparam logic [31:0] WB [8] = '{32'h79C44443, 32'hD464BBB9, 32'h9DCB2A40,
    32'h4E06CFB9, 32'h947DF378, 32'h407001B1, 32'h80A3A278, 32'h236F0F5B};

  initial begin
    for (int i = 0; i < 8; i++) begin
      a = WA[i]; b = WB[i];
      check(FIG_KS[i], "published keystream");
    end
    // One input bit at a time: bit j of a word lands on keystream bit j%8.
    for (int j = 0; j < 32; j++) begin
      a = 32'd1 << j; b = '0; check(8'd1 << (j % 8), "single bit a");
      a = '0; b = 32'd1 << j; check(8'd1 << (j % 8), "single bit b");
    end
    for (int i = 0; i < 20000; i++) begin
      a = $urandom; b = $urandom;
      check(ref_ks(a, b), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

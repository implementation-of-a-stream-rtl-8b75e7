// bernoulli_ref_pkg: reference model used by the testbenches.
//
// Written independently of the RTL datapath: the map is evaluated in its
// piecewise form with 64-bit integers (no shift-and-drop of the 33rd bit),
//   x < 2^31 :  x' = floor(2*x*mu / 256)           + 2^31*(256-mu)/256
//   x >= 2^31:  x' = floor((2*x - 2^32)*mu / 256)  + 2^31*(256-mu)/256
// and the keystream byte is the XOR of the eight bytes taken by shifting
// and masking, one byte at a time. The published waveform values are kept
// here too, as constants the testbenches compare against.
package bernoulli_ref_pkg;

  function automatic logic [31:0] ref_step(input logic [31:0] x,
                                           input logic [7:0]  mu);
    longint unsigned t, gf;
    gf = ((64'd1 << 31) * (64'd256 - 64'(mu))) / 64'd256;
    if (64'(x) < (64'd1 << 31)) t = (64'd2 * 64'(x) * 64'(mu)) / 64'd256;
    else                        t = ((64'd2 * 64'(x) - (64'd1 << 32)) * 64'(mu)) / 64'd256;
    return 32'(t + gf);
  endfunction

  function automatic logic [7:0] ref_ks(input logic [31:0] a,
                                        input logic [31:0] b);
    logic [7:0] z;
    z = 8'h00;
    for (int i = 0; i < 4; i++) begin
      z = z ^ 8'((a >> (8*i)) & 32'hFF);
      z = z ^ 8'((b >> (8*i)) & 32'hFF);
    end
    return z;
  endfunction

  // Published PRNG simulation: seed 32'hAAAAAAAA, mu 8'hAA.
  localparam logic [31:0] FIG_PRNG [7] = '{
    32'h63AAAAA9, 32'hAF5EAAA8, 32'h69E9BAA7, 32'hB7AA6BE5,
    32'h74EE574C, 32'hC64C8BF0, 32'h885DA9DA };

  // Published keystream simulation: seeds AAAAAAAA/BBBBBBBB, mu AA/BB.
  localparam logic [7:0] FIG_KS [8] = '{
    8'h70, 8'h41, 8'hA1, 8'hAD, 8'hE3, 8'h71, 8'h5F, 8'hC2 };

endpackage

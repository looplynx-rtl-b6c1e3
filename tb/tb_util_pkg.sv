// tb_util_pkg: helpers shared by the testbenches.
//
// gen_byte() is the deterministic pseudo-random content of HBM that no one
// has written: an integer hash of (seed, beat address, byte lane). The HBM
// channel model and the testbenches' reference computations both use it, so
// the references never need to store the weights. Weight bytes lie in
// [-8, 7]; bias lanes (int32) in [-64, 63].
package tb_util_pkg;

  function automatic logic [31:0] hash32(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] h;
    h = a * 32'h9E37_79B1 ^ (b + 32'h7F4A_7C15);
    h = h ^ (h >> 15);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2_AE35;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic logic signed [7:0] gen_byte(input int seed, input int addr, input int lane);
    logic [31:0] h;
    h = hash32(32'(seed) * 32'd65599 + 32'(addr), 32'(lane));
    return 8'($signed({1'b0, h[3:0]}) - 5'sd8);
  endfunction

  function automatic logic signed [31:0] gen_bias(input int seed, input int addr, input int lane);
    logic [31:0] h;
    h = hash32(32'(seed) * 32'd131 + 32'(addr) + 32'h5555, 32'(lane) + 32'd77);
    return 32'($signed({1'b0, h[6:0]}) - 8'sd64);
  endfunction

  // Weight beat of an MP channel: bias beats are the last 4 of each block.
  function automatic logic [255:0] gen_weight_beat(input int seed, input int addr, input bit is_bias);
    logic [255:0] d;
    for (int g = 0; g < 32; g++) d[8*g +: 8] = gen_byte(seed, addr, g);
    if (is_bias) for (int i = 0; i < 8; i++) d[32*i +: 32] = gen_bias(seed, addr, i);
    return d;
  endfunction

endpackage

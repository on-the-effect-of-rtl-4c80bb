// tb_scarf_pkg: function form of the testbench stand-in for the per-way
// index cipher, and the per-way keys the testbenches use.
//
// scarf_f(key, tweak, pt, idx_w) is a keyed bijection of the idx_w-bit
// index pt for every tweak: xor with a tweak-derived value, multiply by an
// odd number, xorshift, add, all modulo 2^idx_w. It only models the
// interface and the bijectivity of the real cipher, none of its strength.
package tb_scarf_pkg;

  function automatic logic [63:0] scarf_key(input int unsigned way);
    return 64'h5DEECE66D_0000 ^ (64'(way + 1) * 64'hD1B5_4A32_D192_ED03);
  endfunction

  function automatic int unsigned scarf_f(input logic [63:0] key, input logic [47:0] tweak,
                                          input int unsigned pt, input int unsigned idx_w);
    logic [63:0] h;
    int unsigned mask, x, mul;
    mask = (1 << idx_w) - 1;
    h = key ^ (64'(tweak) * 64'h9E37_79B9_7F4A_7C15);
    h = h ^ (h >> 29);
    h = h * 64'hBF58_476D_1CE4_E5B9;
    h = h ^ (h >> 32);
    x   = (pt ^ int'(h[31:0])) & mask;
    mul = (int'(h[47:16]) & mask) | 1;
    x   = (x * mul) & mask;
    x   = x ^ (x >> (idx_w / 2));
    x   = (x + (int'(h[63:40]) & mask)) & mask;
    return x;
  endfunction

endpackage

// scarf_model: behavioural stand-in for the per-way index cipher of the
// randomized cache (testbench only).
//
// The intended cipher is SCARF, a 10-bit tweakable block cipher with a
// 48-bit tweak and a 240-bit key, whose internals are not reproduced here.
// This model only has the properties the cache relies on: for a fixed key
// and tweak it is a bijection on the index (so different indices of one tag
// never meet in a way), and different keys or tweaks give unrelated-looking
// outputs. It is a keyed xor / odd-multiply / xorshift / add chain on
// IDX_W bits and has no cryptographic strength. Combinational, like the
// single-cycle cipher the cache expects.
module scarf_model #(
  parameter int unsigned  IDX_W   = 10,
  parameter int unsigned  TWEAK_W = 48,
  parameter logic [63:0]  KEY     = 64'h0123_4567_89AB_CDEF
) (
  input  logic [TWEAK_W-1:0] tweak,
  input  logic [IDX_W-1:0]   pt,
  output logic [IDX_W-1:0]   ct
);
  logic [63:0]      h;
  logic [IDX_W-1:0] x;
  always_comb begin
    h = KEY ^ (64'(tweak) * 64'h9E37_79B9_7F4A_7C15);
    h = h ^ (h >> 29);
    h = h * 64'hBF58_476D_1CE4_E5B9;
    h = h ^ (h >> 32);
    x = pt ^ h[IDX_W-1:0];
    x = x * (h[IDX_W+15:16] | IDX_W'(1));
    x = x ^ (x >> (IDX_W / 2));
    x = x + h[IDX_W+39:40];
    ct = x;
  end
endmodule

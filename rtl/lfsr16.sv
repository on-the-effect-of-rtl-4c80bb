// lfsr16: 16-bit linear feedback shift register, the pseudorandom source of
// the replacement logic.
//
// The register shifts left by one position every cycle in which en is high;
// the bit shifted in is the XOR of bits 15, 13, 12 and 10, i.e. the
// Fibonacci form of the maximal-length polynomial x^16 + x^14 + x^13 + x^11
// + 1, which runs through all 65535 non-zero states. A 16-bit register is
// what the design calls for; the polynomial and the seed are this design's
// own choice. Reset loads SEED (must be non-zero). q is the current state
// and is used directly as a word of random bits.
module lfsr16 #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [15:0] q
);

  logic fb;
  assign fb = q[15] ^ q[13] ^ q[12] ^ q[10];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= SEED;
    else if (en) q <= {q[14:0], fb};
  end

endmodule

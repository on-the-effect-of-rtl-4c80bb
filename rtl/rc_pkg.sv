// rc_pkg: constants and types shared by the randomized cache and its
// replacement policies.
//
// The default geometry is the FPGA data cache the design targets: 4 ways,
// 1024 sets, 16-byte lines behind a core with 22-bit byte addresses, so an
// address splits into a 4-bit line offset, a 10-bit set index and an 8-bit
// tag. The randomization cipher takes a 48-bit tweak, so the tag is
// zero-extended to that width. VARP_AGES is m of VARP-m (64 ages, 6 bits per
// line).
//
// tree_pick() is the random tie-break used by every policy: a binary tree
// over the ways in which each inner node, steered by one random bit, picks
// one of its children that still has an eligible way below it.
package rc_pkg;

  localparam int unsigned WAYS       = 4;
  localparam int unsigned SETS       = 1024;
  localparam int unsigned LINE_BYTES = 16;
  localparam int unsigned ADDR_W     = 22;
  localparam int unsigned VARP_AGES  = 64;
  localparam int unsigned TWEAK_W    = 48;
  localparam int unsigned WORD_W     = 32;

  // Replacement policies the cache can be built with.
  typedef enum logic [1:0] {
    RP_RRP    = 2'd0,   // random replacement, stateless
    RP_DRPLRU = 2'd1,   // dynamic random pseudo-LRU
    RP_FRPLRU = 2'd2,   // fixed random pseudo-LRU (ages ordered per set index)
    RP_VARP   = 2'd3    // variable age replacement, VARP_AGES ages
  } policy_e;

  // Random tie-break over a mask of eligible ways (at least one bit set).
  // Heap layout: node n has children 2n+1 and 2n+2, leaves W-1 .. 2W-2.
  // rbits[n] = 1 makes inner node n prefer its right child.
  // W must be a power of two, at most 16.
  function automatic logic [3:0] tree_pick(input logic [15:0] mask,
                                           input logic [14:0] rbits,
                                           input int unsigned W);
    logic        any [0:30];
    logic [3:0]  idx [0:30];
    for (int n = 0; n < 31; n++) begin
      any[n] = 1'b0;
      idx[n] = '0;
    end
    for (int l = 0; l < 16; l++) begin
      if (l < W) begin
        any[W-1+l] = mask[l];
        idx[W-1+l] = 4'(l);
      end
    end
    for (int n = 14; n >= 0; n--) begin
      if (n < W - 1) begin
        if (any[2*n+2] && (!any[2*n+1] || rbits[n])) begin
          any[n] = 1'b1;
          idx[n] = idx[2*n+2];
        end else begin
          any[n] = any[2*n+1];
          idx[n] = idx[2*n+1];
        end
      end
    end
    return idx[0];
  endfunction

endpackage

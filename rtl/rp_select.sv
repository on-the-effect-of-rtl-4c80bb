// rp_select: victim choice shared by all replacement policies.
//
// Given the replacement ages of the W candidate entries (one per way, as
// chosen by the randomized index), it finds the highest age, counts how many
// candidates share it and picks one of them with a binary tree whose inner
// nodes are steered by random bits (rc_pkg::tree_pick). This follows the
// described hardware: check for the oldest line, count the ways of that age,
// choose randomly among them through an LFSR-controlled tree. Preferring an
// invalid candidate over every valid one is this design's own addition, so
// that an empty entry is filled before a live line is evicted; for the
// stateless random policy all ages are equal and the choice is uniform.
// Purely combinational.
module rp_select #(
  parameter int unsigned W     = 4,
  parameter int unsigned AGE_W = 2
) (
  input  logic [W-1:0][AGE_W-1:0] age,
  input  logic [W-1:0]            valid,
  input  logic [W-2:0]            rnd,
  output logic [$clog2(W)-1:0]    way,
  output logic [AGE_W-1:0]        max_age,
  output logic [$clog2(W):0]      max_count,
  output logic                    tie
);

  logic [W-1:0]  oldest;
  logic [W-1:0]  eligible;
  logic [15:0]   mask16;
  logic [14:0]   rnd15;

  always_comb begin
    max_age = '0;
    for (int i = 0; i < W; i++)
      if (age[i] > max_age) max_age = age[i];
    max_count = '0;
    for (int i = 0; i < W; i++) begin
      oldest[i] = (age[i] == max_age);
      max_count = max_count + ($clog2(W)+1)'(oldest[i]);
    end
    eligible = (&valid) ? oldest : ~valid;
    tie      = (eligible & (eligible - W'(1))) != '0;
    mask16   = 16'(eligible);
    rnd15    = 15'(rnd);
    way      = $clog2(W)'(rc_pkg::tree_pick(mask16, rnd15, W));
  end

endmodule

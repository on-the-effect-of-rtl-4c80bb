// rp_rrp: random replacement policy (RRP).
//
// Stateless: it stores nothing per cache line, and the victim is one of the
// W candidate entries chosen at random (an invalid candidate first). Its
// only storage is the 16-bit LFSR. The port list is the one every policy
// shares, so the cache can be built with any of them:
//   init_en/init_idx  reset sweep, one set index per cycle (no-op here)
//   rd_en/cand_idx    read the candidates' state; victim, cand_age and tie
//                     are valid from the next cycle until the next read
//   cand_valid        valid bits of the candidates, same cycle as victim
//   upd_en/upd_way    record an access to candidate upd_way (no-op here);
//                     upd_done pulses one cycle later
// The random bits advance every cycle.
module rp_rrp #(
  parameter int unsigned W    = 4,
  parameter int unsigned SETS = 1024
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              init_en,
  input  logic [$clog2(SETS)-1:0]           init_idx,
  input  logic                              rd_en,
  input  logic [W-1:0][$clog2(SETS)-1:0]    cand_idx,
  input  logic [W-1:0]                      cand_valid,
  output logic [$clog2(W)-1:0]              victim,
  output logic [W-1:0][7:0]                 cand_age,
  output logic                              tie,
  input  logic                              upd_en,
  input  logic [$clog2(W)-1:0]              upd_way,
  output logic                              upd_done
);

  logic [15:0]           rnd;
  logic [W-1:0][0:0]     zero_age;
  logic [0:0]            max_age;
  logic [$clog2(W):0]    max_count;

  lfsr16 u_lfsr (.clk, .rst_n, .en(1'b1), .q(rnd));

  assign zero_age = '0;
  assign cand_age = '0;

  rp_select #(.W(W), .AGE_W(1)) u_sel (
    .age(zero_age), .valid(cand_valid), .rnd(rnd[W-2:0]),
    .way(victim), .max_age, .max_count, .tie
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) upd_done <= 1'b0;
    else        upd_done <= upd_en;
  end

  // Stateless: nothing is kept for these inputs.
  logic unused;
  assign unused = ^{init_en, init_idx, rd_en, cand_idx, upd_way, max_age, max_count};

endmodule

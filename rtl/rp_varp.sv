// rp_varp: variable age replacement policy, VARP-m (m = AGES, 64 by default).
//
// Every cache line has its own age in 0..m-1 (6 bits for m = 64), kept in
// one RAM per way and not ordered against any other line. The victim is the
// candidate with the highest age, ties broken at random (rp_select). On an
// access (a hit, or the fill of the victim after a miss) the accessed entry
// gets age 0 and every other candidate of that access ages by one, saturating
// at m-1. The text describes the aging as a shift "left by one" while its
// figure shows ages going up by one; this design increments, as the figure
// shows. Saturation at m-1 follows from the stated age range; the reset
// value 0 is this design's choice. Port timing is the one shared by all
// policies (see rp_rrp): victim valid the cycle after rd_en, upd_done one
// cycle after upd_en, the update uses the ages of the last read.
module rp_varp #(
  parameter int unsigned W    = 4,
  parameter int unsigned SETS = 1024,
  parameter int unsigned AGES = 64
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

  localparam int unsigned AGE_W = $clog2(AGES);
  localparam int unsigned IDX_W = $clog2(SETS);

  logic [15:0]                 rnd;
  logic [W-1:0][AGE_W-1:0]     age_q;
  logic [W-1:0][AGE_W-1:0]     age_new;
  logic [AGE_W-1:0]            max_age;
  logic [$clog2(W):0]          max_count;

  lfsr16 u_lfsr (.clk, .rst_n, .en(1'b1), .q(rnd));

  rp_select #(.W(W), .AGE_W(AGE_W)) u_sel (
    .age(age_q), .valid(cand_valid), .rnd(rnd[W-2:0]),
    .way(victim), .max_age, .max_count, .tie
  );

  always_comb begin
    for (int w = 0; w < W; w++) begin
      if (w == int'(upd_way))                age_new[w] = '0;
      else if (age_q[w] == AGE_W'(AGES - 1)) age_new[w] = age_q[w];
      else                                   age_new[w] = age_q[w] + AGE_W'(1);
      cand_age[w] = 8'(age_q[w]);
    end
  end

  for (genvar w = 0; w < W; w++) begin : g_way
    logic [IDX_W-1:0] addr;
    assign addr = init_en ? init_idx : cand_idx[w];
    sp_ram #(.DEPTH(SETS), .WIDTH(AGE_W)) u_age (
      .clk, .en(init_en | rd_en | upd_en), .we(init_en | upd_en), .addr,
      .wdata(init_en ? '0 : age_new[w]), .rdata(age_q[w])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) upd_done <= 1'b0;
    else        upd_done <= upd_en;
  end

  logic unused;
  assign unused = ^{max_age, max_count};

endmodule

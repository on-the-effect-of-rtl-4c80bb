// rp_drplru: dynamic random pseudo-LRU replacement policy (DRPLRU).
//
// Every cache line has an age in 0..W-1 (2 bits for 4 ways), one RAM per
// way. The victim is the candidate with the highest age, ties broken at
// random (rp_select). On an access (hit, or fill of the victim after a miss)
// the W candidates of that access are re-ranked: the accessed entry gets age
// 0 and the others get 1..W-1 in the order of their old ages, so that after
// every access the candidate set holds each age exactly once. Candidates
// with equal old ages are put in a random order: this design ranks them by
// way number rotated by a random amount, which is its own choice of how to
// draw that random order. Reset sets every age to 0 (own choice). Port
// timing is the one shared by all policies (see rp_rrp).
module rp_drplru #(
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

  localparam int unsigned AGE_W = $clog2(W);
  localparam int unsigned IDX_W = $clog2(SETS);

  logic [15:0]                 rnd;
  logic [W-1:0][AGE_W-1:0]     age_q;
  logic [W-1:0][AGE_W-1:0]     age_new;
  logic [AGE_W-1:0]            max_age;
  logic [AGE_W:0]              max_count;
  logic [AGE_W-1:0]            rot;

  lfsr16 u_lfsr (.clk, .rst_n, .en(1'b1), .q(rnd));

  rp_select #(.W(W), .AGE_W(AGE_W)) u_sel (
    .age(age_q), .valid(cand_valid), .rnd(rnd[W-2:0]),
    .way(victim), .max_age, .max_count, .tie
  );

  // Random tie order: way k ranks before way j at equal age when
  // (k - rot) mod W < (j - rot) mod W.
  assign rot = rnd[W-1 +: AGE_W];

  always_comb begin
    logic [AGE_W-1:0] pj, pk;
    pj = '0;
    pk = '0;
    for (int j = 0; j < W; j++) begin
      age_new[j]  = '0;
      cand_age[j] = 8'(age_q[j]);
      if (j != int'(upd_way)) begin
        age_new[j] = AGE_W'(1);
        pj = AGE_W'(j) - rot;
        for (int k = 0; k < W; k++) begin
          pk = AGE_W'(k) - rot;
          if (k != j && k != int'(upd_way) &&
              (age_q[k] < age_q[j] || (age_q[k] == age_q[j] && pk < pj)))
            age_new[j] = age_new[j] + AGE_W'(1);
        end
      end
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

// rp_frplru: fixed random pseudo-LRU replacement policy (FRPLRU, the RPLRU
// policy of the TLBCoat randomized TLB).
//
// Every cache line has an age in 0..W-1 (2 bits for 4 ways) that orders it
// against the other W lines stored at the same set index across the ways
// (the set it would belong to without randomization); within one set index
// the ages are always a permutation of 0..W-1. The victim is the candidate
// with the highest age, ties broken at random (rp_select). On an access the
// set index that holds the accessed entry is updated as in true LRU: the
// accessed line gets 0 and every line of that index younger than it ages by
// one. Because the index to update is only known after the choice, the
// update takes two cycles: read the whole index (all ways at one address),
// then write it back; upd_done pulses in the cycle after the write. The
// paper notes that a tree-PLRU could keep these ages instead; this design
// keeps the exact order. Reset gives way w age w at every index (own
// choice). Port timing otherwise as in rp_rrp.
module rp_frplru #(
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
  logic                        row_wr;     // second update cycle: write row
  logic [IDX_W-1:0]            row_idx;
  logic [AGE_W-1:0]            row_way;

  lfsr16 u_lfsr (.clk, .rst_n, .en(1'b1), .q(rnd));

  rp_select #(.W(W), .AGE_W(AGE_W)) u_sel (
    .age(age_q), .valid(cand_valid), .rnd(rnd[W-2:0]),
    .way(victim), .max_age, .max_count, .tie
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_wr   <= 1'b0;
      upd_done <= 1'b0;
      row_idx  <= '0;
      row_way  <= '0;
    end else begin
      row_wr   <= upd_en;
      upd_done <= row_wr;
      if (upd_en) begin
        row_idx <= cand_idx[upd_way];
        row_way <= upd_way;
      end
    end
  end

  // LRU update of the row read in the first update cycle.
  always_comb begin
    for (int w = 0; w < W; w++) begin
      if (w == int'(row_way))           age_new[w] = '0;
      else if (age_q[w] < age_q[row_way]) age_new[w] = age_q[w] + AGE_W'(1);
      else                              age_new[w] = age_q[w];
      cand_age[w] = 8'(age_q[w]);
    end
  end

  for (genvar w = 0; w < W; w++) begin : g_way
    logic [IDX_W-1:0] addr;
    logic [AGE_W-1:0] wdata;
    always_comb begin
      if (init_en)     addr = init_idx;
      else if (upd_en) addr = cand_idx[upd_way];
      else if (row_wr) addr = row_idx;
      else             addr = cand_idx[w];
      wdata = init_en ? AGE_W'(w) : age_new[w];
    end
    sp_ram #(.DEPTH(SETS), .WIDTH(AGE_W)) u_age (
      .clk, .en(init_en | rd_en | upd_en | row_wr), .we(init_en | row_wr),
      .addr, .wdata, .rdata(age_q[w])
    );
  end

  logic unused;
  assign unused = ^{max_age, max_count};

endmodule

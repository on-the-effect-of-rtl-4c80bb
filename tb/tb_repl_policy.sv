// tb_repl_policy: checks that repl_policy builds the policy its POLICY
// parameter names.
//
// One instance per policy (16 set indices) is swept, then all four ways are
// read at one set index, way 2 is accessed twice and the ages are read back.
// The expected ages and update latencies are worked out by hand for each
// policy: RRP keeps no state; DRPLRU gives the accessed entry 0 and the rest
// a permutation of 1..3; FRPLRU starts each index at ages 0,1,2,3 and moves
// the accessed way to 0 as in LRU; VARP ages the other candidates by one.
module tb_repl_policy;
  localparam int W = 4;
  localparam int SETS = 16;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    init_en = 1'b0;
  logic [3:0]              init_idx = '0;
  logic                    rd_en = 1'b0;
  logic [W-1:0][3:0]       cand_idx = {4{4'd3}};
  logic [W-1:0]            cand_valid = '1;
  logic                    upd_en = 1'b0;
  logic [1:0]              upd_way = 2'd2;
  logic [3:0][1:0]         victim;
  logic [3:0][W-1:0][7:0]  cand_age;
  logic [3:0]              tie;
  logic [3:0]              upd_done;
  int checks = 0;
  int failures = 0;

  repl_policy #(.POLICY(rc_pkg::RP_RRP),    .W(W), .SETS(SETS)) u_p0 (
    .clk, .rst_n, .init_en, .init_idx, .rd_en, .cand_idx, .cand_valid,
    .victim(victim[0]), .cand_age(cand_age[0]), .tie(tie[0]), .upd_en, .upd_way, .upd_done(upd_done[0]));
  repl_policy #(.POLICY(rc_pkg::RP_DRPLRU), .W(W), .SETS(SETS)) u_p1 (
    .clk, .rst_n, .init_en, .init_idx, .rd_en, .cand_idx, .cand_valid,
    .victim(victim[1]), .cand_age(cand_age[1]), .tie(tie[1]), .upd_en, .upd_way, .upd_done(upd_done[1]));
  repl_policy #(.POLICY(rc_pkg::RP_FRPLRU), .W(W), .SETS(SETS)) u_p2 (
    .clk, .rst_n, .init_en, .init_idx, .rd_en, .cand_idx, .cand_valid,
    .victim(victim[2]), .cand_age(cand_age[2]), .tie(tie[2]), .upd_en, .upd_way, .upd_done(upd_done[2]));
  repl_policy #(.POLICY(rc_pkg::RP_VARP),   .W(W), .SETS(SETS), .AGES(64)) u_p3 (
    .clk, .rst_n, .init_en, .init_idx, .rd_en, .cand_idx, .cand_valid,
    .victim(victim[3]), .cand_age(cand_age[3]), .tie(tie[3]), .upd_en, .upd_way, .upd_done(upd_done[3]));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic do_read();
    @(negedge clk) rd_en = 1'b1;
    @(negedge clk) rd_en = 1'b0;
  endtask

  function automatic bit ages_are(input int p, input int a0, input int a1, input int a2, input int a3);
    return cand_age[p][0] == 8'(a0) && cand_age[p][1] == 8'(a1) &&
           cand_age[p][2] == 8'(a2) && cand_age[p][3] == 8'(a3);
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat [4];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk) begin
        init_en = 1'b1;
        init_idx = 4'(s);
      end
    end
    @(negedge clk) init_en = 1'b0;
    do_read();
    chk(ages_are(0, 0, 0, 0, 0), "RRP ages after reset");
    chk(ages_are(1, 0, 0, 0, 0), "DRPLRU ages after reset");
    chk(ages_are(2, 0, 1, 2, 3), "FRPLRU ages after reset");
    chk(ages_are(3, 0, 0, 0, 0), "VARP ages after reset");
    chk(victim[2] == 2'd3, "FRPLRU victim is the oldest way of the index");
    chk(tie[0] && tie[1] && !tie[2] && tie[3], "tie flags after reset");
    for (int rep = 0; rep < 2; rep++) begin
      @(negedge clk) upd_en = 1'b1;
      for (int p = 0; p < 4; p++) lat[p] = 0;
      for (int c = 1; c <= 4; c++) begin
        @(negedge clk) upd_en = 1'b0;
        for (int p = 0; p < 4; p++) if (upd_done[p] && lat[p] == 0) lat[p] = c;
      end
      chk(lat[0] == 1 && lat[1] == 1 && lat[2] == 2 && lat[3] == 1,
          $sformatf("update latencies %0d %0d %0d %0d", lat[0], lat[1], lat[2], lat[3]));
      do_read();
    end
    chk(ages_are(0, 0, 0, 0, 0), "RRP keeps no state");
    chk(cand_age[1][2] == 0 && (cand_age[1][0] | cand_age[1][1] | cand_age[1][3]) == 3 &&
        cand_age[1][0] != cand_age[1][1] && cand_age[1][1] != cand_age[1][3] &&
        cand_age[1][0] != cand_age[1][3] && cand_age[1][0] != 0, "DRPLRU re-ranks candidates");
    chk(ages_are(2, 1, 2, 0, 3), "FRPLRU LRU update of the index");
    chk(ages_are(3, 2, 2, 0, 2), "VARP ages the other candidates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

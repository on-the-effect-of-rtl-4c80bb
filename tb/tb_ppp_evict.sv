// tb_ppp_evict: probability that an attacker evicts a victim line by
// accessing lines partially congruent with it, for the four replacement
// policies on full-size caches (4 ways, 1024 indices).
//
// Twelve ppp_harness instances in eviction mode, 200 trials each from a
// fresh random state: every policy with 11 congruent lines (where random
// replacement evicts the victim about half of the time) and with 125 (where
// VARP-64 does). Four more mix 1024 random lines with the congruent ones,
// in both orders, for RRP (11 lines) and VARP-64 (125 lines): for VARP the
// random lines first age the victim and so help the congruent ones, while
// for RRP the order should not matter. The checks encode the published sizes for a 50 % eviction
// chance (RRP 11, DRPLRU 16, VARP-64 125, FRPLRU 520) with margins for
// 200-trial statistics.
module tb_ppp_evict;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int T = 200;
  logic [11:0] done;
  int ev [12], pfail [12], selfev [12], fail [12];
  int checks = 0;
  int failures = 0;

  ppp_harness #(.POLICY(rc_pkg::RP_RRP),    .G_SIZE(11),  .TRIALS(T), .MODE(1)) u0 (.clk, .rst_n, .done(done[0]), .caught(ev[0]), .prune_fail(pfail[0]), .self_evictions(selfev[0]), .failures(fail[0]));
  ppp_harness #(.POLICY(rc_pkg::RP_DRPLRU), .G_SIZE(11),  .TRIALS(T), .MODE(1)) u1 (.clk, .rst_n, .done(done[1]), .caught(ev[1]), .prune_fail(pfail[1]), .self_evictions(selfev[1]), .failures(fail[1]));
  ppp_harness #(.POLICY(rc_pkg::RP_FRPLRU), .G_SIZE(11),  .TRIALS(T), .MODE(1)) u2 (.clk, .rst_n, .done(done[2]), .caught(ev[2]), .prune_fail(pfail[2]), .self_evictions(selfev[2]), .failures(fail[2]));
  ppp_harness #(.POLICY(rc_pkg::RP_VARP),   .G_SIZE(11),  .TRIALS(T), .MODE(1)) u3 (.clk, .rst_n, .done(done[3]), .caught(ev[3]), .prune_fail(pfail[3]), .self_evictions(selfev[3]), .failures(fail[3]));
  ppp_harness #(.POLICY(rc_pkg::RP_RRP),    .G_SIZE(125), .TRIALS(T), .MODE(1)) u4 (.clk, .rst_n, .done(done[4]), .caught(ev[4]), .prune_fail(pfail[4]), .self_evictions(selfev[4]), .failures(fail[4]));
  ppp_harness #(.POLICY(rc_pkg::RP_DRPLRU), .G_SIZE(125), .TRIALS(T), .MODE(1)) u5 (.clk, .rst_n, .done(done[5]), .caught(ev[5]), .prune_fail(pfail[5]), .self_evictions(selfev[5]), .failures(fail[5]));
  ppp_harness #(.POLICY(rc_pkg::RP_FRPLRU), .G_SIZE(125), .TRIALS(T), .MODE(1)) u6 (.clk, .rst_n, .done(done[6]), .caught(ev[6]), .prune_fail(pfail[6]), .self_evictions(selfev[6]), .failures(fail[6]));
  ppp_harness #(.POLICY(rc_pkg::RP_VARP),   .G_SIZE(125), .TRIALS(T), .MODE(1)) u7 (.clk, .rst_n, .done(done[7]), .caught(ev[7]), .prune_fail(pfail[7]), .self_evictions(selfev[7]), .failures(fail[7]));
  ppp_harness #(.POLICY(rc_pkg::RP_RRP), .G_SIZE(11), .TRIALS(T), .MODE(1), .N_RAND(1024), .COLLIDE_FIRST(1'b0)) u8 (.clk, .rst_n, .done(done[8]), .caught(ev[8]), .prune_fail(pfail[8]), .self_evictions(selfev[8]), .failures(fail[8]));
  ppp_harness #(.POLICY(rc_pkg::RP_RRP), .G_SIZE(11), .TRIALS(T), .MODE(1), .N_RAND(1024), .COLLIDE_FIRST(1'b1)) u9 (.clk, .rst_n, .done(done[9]), .caught(ev[9]), .prune_fail(pfail[9]), .self_evictions(selfev[9]), .failures(fail[9]));
  ppp_harness #(.POLICY(rc_pkg::RP_VARP), .G_SIZE(125), .TRIALS(T), .MODE(1), .N_RAND(1024), .COLLIDE_FIRST(1'b0)) u10 (.clk, .rst_n, .done(done[10]), .caught(ev[10]), .prune_fail(pfail[10]), .self_evictions(selfev[10]), .failures(fail[10]));
  ppp_harness #(.POLICY(rc_pkg::RP_VARP), .G_SIZE(125), .TRIALS(T), .MODE(1), .N_RAND(1024), .COLLIDE_FIRST(1'b1)) u11 (.clk, .rst_n, .done(done[11]), .caught(ev[11]), .prune_fail(pfail[11]), .self_evictions(selfev[11]), .failures(fail[11]));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    string names [4] = '{"RRP", "DRPLRU", "FRPLRU", "VARP-64"};
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    wait (&done);
    for (int i = 0; i < 8; i++)
      $display("%-8s |G'|=%3d: victim evicted in %3d of %0d trials",
               names[i % 4], (i < 4) ? 11 : 125, ev[i], T);
    for (int i = 8; i < 12; i++)
      $display("%-8s |G'|=%3d with 1024 random lines %s: victim evicted in %3d of %0d trials",
               (i < 10) ? "RRP" : "VARP-64", (i < 10) ? 11 : 125,
               (i % 2 == 0) ? "before" : "after ", ev[i], T);
    for (int i = 0; i < 12; i++) chk(fail[i] == 0, "cache did not answer");
    // thresholds in trials out of T = 200
    chk(ev[0] >= 60 && ev[0] <= 140, "RRP, 11 lines: about half evicted");
    chk(ev[1] < ev[0] + 30,          "DRPLRU, 11 lines: not above RRP");
    chk(ev[3] <= 40,                 "VARP-64, 11 lines: rarely evicted");
    chk(ev[2] <= 40,                 "FRPLRU, 11 lines: rarely evicted");
    chk(ev[4] >= 190 && ev[5] >= 190, "RRP and DRPLRU, 125 lines: nearly always evicted");
    chk(ev[7] >= 60 && ev[7] <= 150, "VARP-64, 125 lines: about half evicted");
    chk(ev[6] < ev[7],               "FRPLRU, 125 lines: below VARP-64");
    chk(ev[8] - ev[9] <= 40 && ev[9] - ev[8] <= 40, "RRP: access order does not matter");
    chk(ev[10] >= ev[11] + 20,       "VARP-64: random lines first evict more often");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

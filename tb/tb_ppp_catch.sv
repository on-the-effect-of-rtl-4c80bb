// tb_ppp_catch: catch probability of a Prime+Prune+Probe attacker for the
// four replacement policies, on full-size caches (4 ways, 1024 indices).
//
// Twelve ppp_harness instances run side by side: every policy with an
// eviction set of 31 lines (where random replacement catches about 90 % of
// victim accesses) and of 131 lines (where VARP-64 reaches about 90 %), and
// VARP with 4, 16, 256 and 1024 ages at 31 lines, 200 trials each, the cache reset to a fresh random state (random lines, random
// replacement ages) before each trial. The checks encode the published
// catch probabilities with margins for 200-trial statistics: at 31 lines
// RRP (about 90 %) and DRPLRU catch most accesses while VARP-64 and FRPLRU
// catch few; at 131 lines VARP-64 reaches about 90 % and FRPLRU stays
// below 90 %. VARP with few ages behaves like random replacement, and
// more ages catch fewer accesses. Self-evictions during pruning and a successful prune must
// both occur.
module tb_ppp_catch;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int T = 200;
  logic [11:0] done;
  int caught [12], pfail [12], selfev [12], fail [12];
  int checks = 0;
  int failures = 0;

  ppp_harness #(.POLICY(rc_pkg::RP_RRP),    .G_SIZE(31),  .TRIALS(T)) u0 (.clk, .rst_n, .done(done[0]), .caught(caught[0]), .prune_fail(pfail[0]), .self_evictions(selfev[0]), .failures(fail[0]));
  ppp_harness #(.POLICY(rc_pkg::RP_DRPLRU), .G_SIZE(31),  .TRIALS(T)) u1 (.clk, .rst_n, .done(done[1]), .caught(caught[1]), .prune_fail(pfail[1]), .self_evictions(selfev[1]), .failures(fail[1]));
  ppp_harness #(.POLICY(rc_pkg::RP_FRPLRU), .G_SIZE(31),  .TRIALS(T)) u2 (.clk, .rst_n, .done(done[2]), .caught(caught[2]), .prune_fail(pfail[2]), .self_evictions(selfev[2]), .failures(fail[2]));
  ppp_harness #(.POLICY(rc_pkg::RP_VARP),   .G_SIZE(31),  .TRIALS(T)) u3 (.clk, .rst_n, .done(done[3]), .caught(caught[3]), .prune_fail(pfail[3]), .self_evictions(selfev[3]), .failures(fail[3]));
  ppp_harness #(.POLICY(rc_pkg::RP_RRP),    .G_SIZE(131), .TRIALS(T)) u4 (.clk, .rst_n, .done(done[4]), .caught(caught[4]), .prune_fail(pfail[4]), .self_evictions(selfev[4]), .failures(fail[4]));
  ppp_harness #(.POLICY(rc_pkg::RP_DRPLRU), .G_SIZE(131), .TRIALS(T)) u5 (.clk, .rst_n, .done(done[5]), .caught(caught[5]), .prune_fail(pfail[5]), .self_evictions(selfev[5]), .failures(fail[5]));
  ppp_harness #(.POLICY(rc_pkg::RP_FRPLRU), .G_SIZE(131), .TRIALS(T)) u6 (.clk, .rst_n, .done(done[6]), .caught(caught[6]), .prune_fail(pfail[6]), .self_evictions(selfev[6]), .failures(fail[6]));
  ppp_harness #(.POLICY(rc_pkg::RP_VARP),   .G_SIZE(131), .TRIALS(T)) u7 (.clk, .rst_n, .done(done[7]), .caught(caught[7]), .prune_fail(pfail[7]), .self_evictions(selfev[7]), .failures(fail[7]));
  ppp_harness #(.POLICY(rc_pkg::RP_VARP),   .G_SIZE(31),  .TRIALS(T), .AGES(4)) u8 (.clk, .rst_n, .done(done[8]), .caught(caught[8]), .prune_fail(pfail[8]), .self_evictions(selfev[8]), .failures(fail[8]));
  ppp_harness #(.POLICY(rc_pkg::RP_VARP),   .G_SIZE(31),  .TRIALS(T), .AGES(16)) u9 (.clk, .rst_n, .done(done[9]), .caught(caught[9]), .prune_fail(pfail[9]), .self_evictions(selfev[9]), .failures(fail[9]));
  ppp_harness #(.POLICY(rc_pkg::RP_VARP),   .G_SIZE(31),  .TRIALS(T), .AGES(256)) u10 (.clk, .rst_n, .done(done[10]), .caught(caught[10]), .prune_fail(pfail[10]), .self_evictions(selfev[10]), .failures(fail[10]));
  ppp_harness #(.POLICY(rc_pkg::RP_VARP),   .G_SIZE(31),  .TRIALS(T), .AGES(1024)) u11 (.clk, .rst_n, .done(done[11]), .caught(caught[11]), .prune_fail(pfail[11]), .self_evictions(selfev[11]), .failures(fail[11]));

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
    int ages [4] = '{4, 16, 256, 1024};
    int se, ok;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    wait (&done);
    for (int i = 0; i < 8; i++)
      $display("%-8s |G|=%3d: caught %3d of %0d, prune failures %0d, self-evictions %0d",
               names[i % 4], (i < 4) ? 31 : 131, caught[i], T, pfail[i], selfev[i]);
    for (int i = 8; i < 12; i++)
      $display("VARP-%-4d|G|= 31: caught %3d of %0d, prune failures %0d, self-evictions %0d",
               ages[i - 8], caught[i], T, pfail[i], selfev[i]);
    se = 0;
    ok = 0;
    for (int i = 0; i < 12; i++) begin
      chk(fail[i] == 0, "cache did not answer");
      se += selfev[i];
      ok += T - pfail[i];
    end
    chk(se > 0, "mechanism never seen: self-eviction while pruning");
    chk(ok > 0, "mechanism never seen: successful prune");
    // thresholds in trials out of T = 200
    chk(caught[0] >= 150 && caught[0] <= 196, "RRP, |G|=31: about 90 % caught");
    chk(caught[1] >= 150, "DRPLRU, |G|=31: most accesses caught");
    chk(caught[2] <= 100, "FRPLRU, |G|=31: at most half caught");
    chk(caught[3] <= 80,  "VARP-64, |G|=31: few accesses caught");
    chk(caught[4] >= 190 && caught[5] >= 190, "RRP and DRPLRU, |G|=131: nearly all caught");
    chk(caught[6] < 180,  "FRPLRU, |G|=131: below 90 %");
    chk(caught[7] >= 160, "VARP-64, |G|=131: about 90 % caught");
    chk(caught[8] >= 150, "VARP-4, |G|=31: most accesses caught, like RRP");
    chk(caught[9] <= caught[8] - 40, "VARP-16, |G|=31: clearly fewer than VARP-4");
    chk(caught[11] <= 80, "VARP-1024, |G|=31: few accesses caught");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_miss_rate: miss rates of the four replacement policies under the same
// kind of traffic with locality, on full-size caches (4 ways, 1024 indices,
// 4096 lines).
//
// Four ppp_harness instances in miss-rate mode run 40,000 accesses each after
// a warm-up: 80 % of the accesses go to a hot set of 3072 lines, 75 % of the
// cache's capacity, and the rest go to random lines. A policy that keeps
// recently used lines should keep more of the hot set than random
// replacement does. The checks: RRP has the highest miss rate and VARP-64
// the lowest, each by a clear margin, and DRPLRU and FRPLRU are close.
module tb_miss_rate;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int N = 40000;
  logic [3:0] done;
  int misses [4], pfail [4], selfev [4], fail [4];
  int checks = 0;
  int failures = 0;

  ppp_harness #(.POLICY(rc_pkg::RP_RRP),    .TRIALS(N), .MODE(2)) u0 (.clk, .rst_n, .done(done[0]), .caught(misses[0]), .prune_fail(pfail[0]), .self_evictions(selfev[0]), .failures(fail[0]));
  ppp_harness #(.POLICY(rc_pkg::RP_DRPLRU), .TRIALS(N), .MODE(2)) u1 (.clk, .rst_n, .done(done[1]), .caught(misses[1]), .prune_fail(pfail[1]), .self_evictions(selfev[1]), .failures(fail[1]));
  ppp_harness #(.POLICY(rc_pkg::RP_FRPLRU), .TRIALS(N), .MODE(2)) u2 (.clk, .rst_n, .done(done[2]), .caught(misses[2]), .prune_fail(pfail[2]), .self_evictions(selfev[2]), .failures(fail[2]));
  ppp_harness #(.POLICY(rc_pkg::RP_VARP),   .TRIALS(N), .MODE(2)) u3 (.clk, .rst_n, .done(done[3]), .caught(misses[3]), .prune_fail(pfail[3]), .self_evictions(selfev[3]), .failures(fail[3]));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (5000000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    string names [4] = '{"RRP", "DRPLRU", "FRPLRU", "VARP-64"};
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    wait (&done);
    for (int i = 0; i < 4; i++)
      $display("%-8s misses %5d of %0d accesses (%0d.%0d %%)", names[i], misses[i], N,
               misses[i] * 100 / N, (misses[i] * 1000 / N) % 10);
    for (int i = 0; i < 4; i++) chk(fail[i] == 0, "cache did not answer");
    // a margin of 1 % of the accesses
    for (int i = 1; i < 4; i++) chk(misses[i] + N / 100 < misses[0], "RRP has the most misses");
    for (int i = 0; i < 3; i++) chk(misses[3] + N / 100 < misses[i], "VARP-64 has the fewest misses");
    chk(misses[1] - misses[2] < N * 3 / 100 && misses[2] - misses[1] < N * 3 / 100,
        "DRPLRU and FRPLRU within 3 % of each other");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

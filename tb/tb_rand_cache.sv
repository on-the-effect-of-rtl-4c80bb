// tb_rand_cache: end-to-end testbench of the randomized cache, once per
// replacement policy.
//
// Four caches of 64 set indices (RRP, DRPLRU, FRPLRU and VARP-64) run side
// by side, each in a cache_harness with its own index-cipher models and
// memory model and 3000 random CPU accesses; every read is compared with a
// reference memory and each cache mechanism must occur at least once.
module tb_rand_cache;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] done;
  int         c [4];
  int         f [4];

  cache_harness #(.POLICY(rc_pkg::RP_RRP),    .SETS(64)) u_rrp    (.clk, .rst_n, .done(done[0]), .checks(c[0]), .failures(f[0]));
  cache_harness #(.POLICY(rc_pkg::RP_DRPLRU), .SETS(64)) u_drplru (.clk, .rst_n, .done(done[1]), .checks(c[1]), .failures(f[1]));
  cache_harness #(.POLICY(rc_pkg::RP_FRPLRU), .SETS(64)) u_frplru (.clk, .rst_n, .done(done[2]), .checks(c[2]), .failures(f[2]));
  cache_harness #(.POLICY(rc_pkg::RP_VARP),   .SETS(64)) u_varp   (.clk, .rst_n, .done(done[3]), .checks(c[3]), .failures(f[3]));

  initial begin
    repeat (500000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3], f[0] + f[1] + f[2] + f[3] + 1);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    wait (&done);
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3], f[0] + f[1] + f[2] + f[3]);
    $finish;
  end
endmodule

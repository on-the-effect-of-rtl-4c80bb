// tb_rand_cache_full: the randomized cache at its default configuration
// (4 ways, 1024 set indices, 16-byte lines, VARP-64), no parameter
// overridden, through the full reset sweep and 100000 random accesses with
// every read checked against a reference memory.
module tb_rand_cache_full;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done;
  int   checks;
  int   failures;

  cache_harness #(.SETS(1024), .OPS(100000), .FULL(1'b1)) u_h (.clk, .rst_n, .done, .checks, .failures);

  initial begin
    repeat (5000000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    wait (done);
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

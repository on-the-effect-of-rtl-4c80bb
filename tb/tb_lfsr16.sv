// tb_lfsr16: self-checking testbench of lfsr16.
//
// Checks the reset value, that the state holds while en is low, that each
// step matches a reference computed here from the feedback polynomial
// x^16 + x^14 + x^13 + x^11 + 1 (taps counted from 1 at the shifted-out
// end), and that the sequence has the maximal period 65535 without ever
// reaching the all-zero state.
module tb_lfsr16;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        en = 1'b0;
  logic [15:0] q;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  lfsr16 #(.SEED(16'hACE1)) u_dut (.clk, .rst_n, .en, .q);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  // Reference: taps 16, 14, 13, 11 of the polynomial are state bits
  // 15, 13, 12, 10 of a register shifting towards its MSB.
  function automatic logic [15:0] ref_next(input logic [15:0] s);
    int taps [4] = '{16, 14, 13, 11};
    logic b = 1'b0;
    foreach (taps[i]) b ^= s[taps[i] - 1];
    return (s << 1) | 16'(b);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] exp;
    int period;
    @(negedge clk);
    chk(q == 16'hACE1, "reset value");
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    chk(q == 16'hACE1, "holds while en is low");
    en  = 1'b1;
    exp = 16'hACE1;
    period = 0;
    do begin
      @(negedge clk);
      exp = ref_next(exp);
      period++;
      if (period <= 2000) chk(q == exp, $sformatf("step %0d: %h expected %h", period, q, exp));
      if (q == 16'h0000) chk(1'b0, "reached zero state");
    end while (q != 16'hACE1 && period < 70000);
    chk(period == 65535, $sformatf("period %0d, expected 65535", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

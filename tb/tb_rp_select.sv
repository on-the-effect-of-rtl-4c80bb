// tb_rp_select: self-checking testbench of rp_select.
//
// Random ages (6-bit), valid masks and random bits. For each input the
// testbench works out the highest age, how many candidates have it and which
// ways are eligible (invalid ones first, else the oldest), and checks the
// outputs against that. It then sweeps all random-bit patterns for random
// tie situations and checks that every eligible way, and no other, can be
// picked, and that the tree picks each of two tied ways for half of the
// patterns.
module tb_rp_select;
  localparam int W = 4;
  localparam int AGE_W = 6;
  logic [W-1:0][AGE_W-1:0] age;
  logic [W-1:0]            valid;
  logic [W-2:0]            rnd;
  logic [1:0]              way;
  logic [AGE_W-1:0]        max_age;
  logic [2:0]              max_count;
  logic                    tie;
  int checks = 0;
  int failures = 0;

  rp_select #(.W(W), .AGE_W(AGE_W)) u_dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m, n, ne;
    logic [W-1:0] elig;
    int picked [W];
    for (int i = 0; i < 5000; i++) begin
      for (int w = 0; w < W; w++)
        age[w] = (i % 2 == 0) ? AGE_W'($urandom_range(0, 3)) : AGE_W'($urandom);
      valid = ($urandom_range(0, 3) == 0) ? 4'($urandom) : 4'hF;
      rnd   = 3'($urandom);
      #1;
      m = 0;
      for (int w = 0; w < W; w++) if (age[w] > m) m = age[w];
      n = 0;
      for (int w = 0; w < W; w++) if (age[w] == m) n++;
      for (int w = 0; w < W; w++) elig[w] = (&valid) ? (age[w] == m) : !valid[w];
      ne = $countones(elig);
      chk(max_age == m, "max_age");
      chk(max_count == n, "max_count");
      chk(elig[way], $sformatf("way %0d not eligible (mask %b)", way, elig));
      chk(tie == (ne > 1), "tie flag");
      // sweep the random bits
      for (int w = 0; w < W; w++) picked[w] = 0;
      for (int r = 0; r < 8; r++) begin
        rnd = 3'(r);
        #1;
        picked[way]++;
      end
      for (int w = 0; w < W; w++)
        chk((picked[w] > 0) == elig[w], $sformatf("reachability of way %0d (mask %b)", w, elig));
      if (ne == 2) begin
        for (int w = 0; w < W; w++) if (elig[w]) chk(picked[w] == 4, "two tied ways picked evenly");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

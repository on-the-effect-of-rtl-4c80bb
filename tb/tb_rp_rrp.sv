// tb_rp_rrp: self-checking testbench of rp_rrp (random replacement).
//
// A small instance (16 set indices) is initialised by the reset sweep, then
// driven with random candidate index vectors and valid masks. A reference
// model of every line's age, kept in the testbench, predicts the ages read
// back, the set of legal victims (oldest valid candidate, or any invalid
// one), the tie flag and the state after each update; the update latency
// is checked too (1 cycle(s) to upd_done). Where the policy draws a
// random order (DRPLRU ties) the testbench checks the properties the order
// must have and then adopts it. It also checks that ties are resolved to
// more than one way over the run.
module tb_rp_rrp;
  localparam int W     = 4;
  localparam int SETS  = 16;
  localparam int IDX_W = 4;
  localparam int AGES  = 64;
  localparam int POL   = 0;   // 0 RRP, 1 DRPLRU, 2 FRPLRU, 3 VARP
  localparam int LAT   = 1;
  localparam int OPS   = 3000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                         init_en = 1'b0;
  logic [IDX_W-1:0]             init_idx = '0;
  logic                         rd_en = 1'b0;
  logic [W-1:0][IDX_W-1:0]      cand_idx = '0;
  logic [W-1:0]                 cand_valid = '1;
  logic [1:0]                   victim;
  logic [W-1:0][7:0]            cand_age;
  logic                         tie;
  logic                         upd_en = 1'b0;
  logic [1:0]                   upd_way = '0;
  logic                         upd_done;

  int checks = 0;
  int failures = 0;
  int ref_age [W][SETS];
  int old_age [W];
  int tie_pick [W];
  int ties = 0;

  rp_rrp #(.W(W), .SETS(SETS)) u_dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  task automatic do_read();
    @(negedge clk) rd_en = 1'b1;
    @(negedge clk) rd_en = 1'b0;
  endtask

  task automatic do_update(input int way);
    int cyc;
    @(negedge clk) begin
      upd_en  = 1'b1;
      upd_way = 2'(way);
    end
    @(negedge clk) upd_en = 1'b0;
    cyc = 1;
    while (!upd_done && cyc < 10) begin
      @(negedge clk);
      cyc++;
    end
    chk(cyc == LAT, $sformatf("update latency %0d, expected %0d", cyc, LAT));
  endtask

  task automatic compare_ages(input string when);
    for (int w = 0; w < W; w++)
      chk(int'(cand_age[w]) == ((POL == 0) ? 0 : ref_age[w][cand_idx[w]]),
          $sformatf("%s: way %0d idx %0d age %0d expected %0d", when, w,
                    cand_idx[w], cand_age[w], ref_age[w][cand_idx[w]]));
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int maxa, nmax, ninv, a, r, olda;
    bit seen [W];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // reset sweep
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk) begin
        init_en  = 1'b1;
        init_idx = IDX_W'(s);
      end
      for (int w = 0; w < W; w++) ref_age[w][s] = (POL == 2) ? w : 0;
    end
    @(negedge clk) init_en = 1'b0;

    for (int op = 0; op < OPS; op++) begin
      for (int w = 0; w < W; w++) cand_idx[w] = IDX_W'($urandom_range(0, SETS - 1));
      if (op % 50 == 7) for (int w = 0; w < W; w++) cand_idx[w] = cand_idx[0];
      cand_valid = ($urandom_range(0, 4) == 0) ? 4'($urandom) : 4'hF;
      do_read();
      compare_ages("lookup");
      // legal victim
      maxa = 0;
      for (int w = 0; w < W; w++) begin
        old_age[w] = (POL == 0) ? 0 : ref_age[w][cand_idx[w]];
        if (old_age[w] > maxa) maxa = old_age[w];
      end
      nmax = 0;
      ninv = 0;
      for (int w = 0; w < W; w++) begin
        if (old_age[w] == maxa) nmax++;
        if (!cand_valid[w]) ninv++;
      end
      if (&cand_valid) begin
        chk(old_age[victim] == maxa, $sformatf("victim way %0d age %0d, oldest %0d",
                                               victim, old_age[victim], maxa));
        chk(tie == (nmax > 1), "tie flag (all valid)");
        if (nmax > 1) begin
          ties++;
          tie_pick[victim]++;
        end
      end else begin
        chk(!cand_valid[victim], "victim must be an invalid candidate");
        chk(tie == (ninv > 1), "tie flag (invalid candidates)");
      end
      // access: a hit on a random way, or the fill of the victim
      a = ($urandom_range(0, 1) == 1) ? $urandom_range(0, W - 1) : int'(victim);
      do_update(a);
      case (POL)
        3: for (int w = 0; w < W; w++)
             ref_age[w][cand_idx[w]] = (w == a) ? 0 :
                 ((old_age[w] == AGES - 1) ? AGES - 1 : old_age[w] + 1);
        2: begin
          r    = int'(cand_idx[a]);
          olda = ref_age[a][r];
          for (int w = 0; w < W; w++)
            if (w == a) ref_age[w][r] = 0;
            else if (ref_age[w][r] < olda) ref_age[w][r]++;
        end
        1: begin
          do_read();
          for (int w = 0; w < W; w++) seen[w] = 1'b0;
          for (int w = 0; w < W; w++) seen[cand_age[w]] = 1'b1;
          chk(cand_age[a] == 0, "accessed entry must get age 0");
          chk(seen[0] && seen[1] && seen[2] && seen[3], "candidate ages must be 0..W-1");
          for (int j = 0; j < W; j++)
            for (int k = 0; k < W; k++)
              if (j != a && k != a && old_age[j] < old_age[k])
                chk(cand_age[j] < cand_age[k], "relative order of older candidates kept");
          for (int w = 0; w < W; w++) ref_age[w][cand_idx[w]] = int'(cand_age[w]);
        end
        default: ;
      endcase
      do_read();
      compare_ages("after update");
      if (POL == 2 && op % 20 == 0) begin
        // every set index must hold a permutation of 0..W-1
        for (int w = 0; w < W; w++) cand_idx[w] = cand_idx[a];
        do_read();
        for (int w = 0; w < W; w++) seen[w] = 1'b0;
        for (int w = 0; w < W; w++) seen[cand_age[w]] = 1'b1;
        chk(seen[0] && seen[1] && seen[2] && seen[3], "row ages must be a permutation");
      end
    end
    // random tie-break must reach more than one way
    nmax = 0;
    for (int w = 0; w < W; w++) if (tie_pick[w] > 0) nmax++;
    chk(ties > 0, "no tie between equally old candidates occurred");
    chk(nmax > 1, "ties always resolved to the same way");
    $display("ties=%0d picks=%0d/%0d/%0d/%0d", ties, tie_pick[0], tie_pick[1], tie_pick[2], tie_pick[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

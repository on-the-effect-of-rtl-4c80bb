// ppp_harness: runs the attacker experiments of a Prime+Prune+Probe study,
// and a miss-rate measurement, against one full-size rand_cache
// (testbench only). It computes each way's index itself with the
// testbench copy of the index cipher, and sees a miss as an attacker would:
// a response later than the 3-cycle hit latency. The memory model always
// grants and answers after 2 cycles; data is not checked here.
//
// Fresh random state, before each trial of modes 0 and 1: 2048 random lines
// are accessed (8192 before the first trial), then every line's replacement
// age is overwritten with a random legal value straight in the policy's age
// RAMs: uniform 0..m-1 for VARP, 0..W-1 for DRPLRU, a random permutation per
// index for FRPLRU. RRP has no state.
//
// MODE 0, catching an access. A random victim line V is drawn, and an
// eviction set G of G_SIZE lines partially congruent with V (each shares
// V's entry in at least one way). The attacker accesses G repeatedly until
// one pass sees no miss (prime and prune, at most 20 passes), the victim
// accesses V, and the attacker probes G again: the access is caught if any
// probe misses.
//
// MODE 1, targeted eviction. The victim accesses V, the attacker accesses
// N_RAND random lines and G_SIZE fresh lines partially congruent with V
// (random ones first unless COLLIDE_FIRST is set), and V is accessed again:
// a miss counts as an eviction.
//
// MODE 2, miss rate. TRIALS accesses with locality: 80 % go to a hot set of
// HOT_LINES lines, the rest to random lines.
//
// Outputs: done; caught (catches, evictions or misses, by mode); trials
// whose pruning did not converge; lines dropped while pruning
// (self-evictions); failures (accesses the cache did not answer). AGES sets
// VARP's age count.
module ppp_harness #(
  parameter rc_pkg::policy_e POLICY = rc_pkg::RP_VARP,
  parameter int unsigned     G_SIZE = 31,
  parameter int unsigned     TRIALS = 100,
  parameter int unsigned     MODE   = 0,
  parameter int unsigned     AGES   = rc_pkg::VARP_AGES,
  parameter int unsigned     N_RAND = 0,
  parameter bit              COLLIDE_FIRST = 1'b0,
  parameter int unsigned     HOT_LINES = 3072
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   caught,
  output int   prune_fail,
  output int   self_evictions,
  output int   failures
);
  localparam int WAYS  = 4;
  localparam int IDX_W = 10;
  localparam int LA_W  = 18;

  logic                       ready;
  logic                       cpu_req = 1'b0;
  logic                       cpu_gnt;
  logic [21:0]                cpu_addr = '0;
  logic                       cpu_rvalid;
  logic [31:0]                cpu_rdata;
  logic [47:0]                rnd_tweak;
  logic [IDX_W-1:0]           rnd_index;
  logic [WAYS-1:0][IDX_W-1:0] rnd_set;
  logic                       mem_req, mem_we, mem_rvalid = 1'b0;
  logic [21:0]                mem_addr;
  logic [3:0]                 mem_be;
  logic [31:0]                mem_wdata;
  logic                       s_hit, s_miss, s_evict, s_tie;
  int                         mem_cnt = 0;

  rand_cache #(.POLICY(POLICY), .AGES(AGES)) u_dut (
    .clk, .rst_n, .ready_o(ready),
    .cpu_req_i(cpu_req), .cpu_gnt_o(cpu_gnt), .cpu_addr_i(cpu_addr), .cpu_we_i(1'b0),
    .cpu_be_i(4'h0), .cpu_wdata_i(32'h0), .cpu_rvalid_o(cpu_rvalid), .cpu_rdata_o(cpu_rdata),
    .rnd_tweak_o(rnd_tweak), .rnd_index_o(rnd_index), .rnd_set_i(rnd_set),
    .mem_req_o(mem_req), .mem_gnt_i(1'b1), .mem_we_o(mem_we), .mem_addr_o(mem_addr),
    .mem_be_o(mem_be), .mem_wdata_o(mem_wdata), .mem_rvalid_i(mem_rvalid), .mem_rdata_i(128'h0),
    .stat_hit_o(s_hit), .stat_miss_o(s_miss), .stat_evict_o(s_evict), .stat_tie_o(s_tie)
  );

  always_comb
    for (int w = 0; w < WAYS; w++)
      rnd_set[w] = IDX_W'(tb_scarf_pkg::scarf_f(tb_scarf_pkg::scarf_key(w), rnd_tweak,
                                                int'(rnd_index), IDX_W));

  // Fresh random replacement state, written into the age RAMs.
  event fresh_ev;
  if (POLICY == rc_pkg::RP_VARP) begin : g_bd_varp
    for (genvar w = 0; w < WAYS; w++) begin : g_w
      always @(fresh_ev)
        for (int i = 0; i < 1024; i++)
          u_dut.u_policy.g_varp.u_rp.g_way[w].u_age.mem[i] = $clog2(AGES)'($urandom_range(0, AGES - 1));
    end
  end else if (POLICY == rc_pkg::RP_DRPLRU) begin : g_bd_drplru
    for (genvar w = 0; w < WAYS; w++) begin : g_w
      always @(fresh_ev)
        for (int i = 0; i < 1024; i++)
          u_dut.u_policy.g_drplru.u_rp.g_way[w].u_age.mem[i] = 2'($urandom_range(0, 3));
    end
  end else if (POLICY == rc_pkg::RP_FRPLRU) begin : g_bd_frplru
    always @(fresh_ev) begin
      logic [1:0] p [4];
      for (int i = 0; i < 1024; i++) begin
        for (int w = 0; w < 4; w++) p[w] = 2'(w);
        for (int w = 3; w > 0; w--) begin
          int j;
          logic [1:0] t;
          j = $urandom_range(0, w);
          t = p[w]; p[w] = p[j]; p[j] = t;
        end
        u_dut.u_policy.g_frplru.u_rp.g_way[0].u_age.mem[i] = p[0];
        u_dut.u_policy.g_frplru.u_rp.g_way[1].u_age.mem[i] = p[1];
        u_dut.u_policy.g_frplru.u_rp.g_way[2].u_age.mem[i] = p[2];
        u_dut.u_policy.g_frplru.u_rp.g_way[3].u_age.mem[i] = p[3];
      end
    end
  end

  always @(posedge clk) begin
    mem_rvalid <= 1'b0;
    if (mem_cnt > 0) begin
      mem_cnt <= mem_cnt - 1;
      if (mem_cnt == 1) mem_rvalid <= 1'b1;
    end else if (mem_req) mem_cnt <= 2;
  end

  // One read; returns 1 on a miss, judged by latency only.
  task automatic access(input logic [LA_W-1:0] la, output bit miss);
    int lat;
    @(negedge clk);
    cpu_req  = 1'b1;
    cpu_addr = {la, 4'h0};
    while (!cpu_gnt) @(negedge clk);
    @(negedge clk);
    cpu_req = 1'b0;
    lat = 1;
    while (!cpu_rvalid && lat < 100) begin
      @(negedge clk);
      lat++;
    end
    if (!cpu_rvalid) failures++;
    miss = (lat > 3);
  endtask

  function automatic bit congruent(input logic [LA_W-1:0] a, input logic [LA_W-1:0] v);
    for (int w = 0; w < WAYS; w++)
      if (tb_scarf_pkg::scarf_f(tb_scarf_pkg::scarf_key(w), 48'(a[LA_W-1:IDX_W]), int'(a[IDX_W-1:0]), IDX_W) ==
          tb_scarf_pkg::scarf_f(tb_scarf_pkg::scarf_key(w), 48'(v[LA_W-1:IDX_W]), int'(v[IDX_W-1:0]), IDX_W))
        return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    logic [LA_W-1:0] v, a;
    logic [LA_W-1:0] g [G_SIZE];
    bit miss, any_miss, pruned;
    done = 1'b0;
    caught = 0;
    prune_fail = 0;
    self_evictions = 0;
    failures = 0;
    @(posedge rst_n);
    while (!ready) @(negedge clk);
    for (int i = 0; i < 8192; i++) access(LA_W'($urandom), miss);
    if (MODE == 2)
      for (int t = 0; t < TRIALS; t++) begin
        if ($urandom_range(0, 99) < 80) access(LA_W'($urandom_range(0, HOT_LINES - 1)), miss);
        else access(LA_W'($urandom), miss);
        if (miss) caught++;
      end
    for (int t = 0; t < ((MODE == 2) ? 0 : TRIALS); t++) begin
      @(negedge clk);
      -> fresh_ev;
      @(negedge clk);
      v = LA_W'($urandom);
      if (MODE == 1) begin
        access(v, miss);
        if (!COLLIDE_FIRST)
          for (int i = 0; i < N_RAND; i++) access(LA_W'($urandom), miss);
        for (int i = 0; i < G_SIZE; i++) begin
          do a = LA_W'($urandom); while (a == v || !congruent(a, v));
          access(a, miss);
        end
        if (COLLIDE_FIRST)
          for (int i = 0; i < N_RAND; i++) access(LA_W'($urandom), miss);
        access(v, miss);
        if (miss) caught++;
        for (int i = 0; i < 2048; i++) access(LA_W'($urandom), miss);
        continue;
      end
      for (int i = 0; i < G_SIZE; i++) begin
        do a = LA_W'($urandom); while (a == v || !congruent(a, v));
        g[i] = a;
      end
      pruned = 1'b0;
      for (int p = 0; p < 20 && !pruned; p++) begin
        any_miss = 1'b0;
        for (int i = 0; i < G_SIZE; i++) begin
          access(g[i], miss);
          any_miss |= miss;
        end
        if (p > 0 && any_miss) self_evictions++;
        pruned = !any_miss;
      end
      if (!pruned) prune_fail++;
      access(v, miss);
      if (pruned) begin
        any_miss = 1'b0;
        for (int i = 0; i < G_SIZE; i++) begin
          access(g[i], miss);
          any_miss |= miss;
        end
        if (any_miss) caught++;
      end
      for (int i = 0; i < 2048; i++) access(LA_W'($urandom), miss);
    end
    done = 1'b1;
  end
endmodule

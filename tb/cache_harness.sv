// cache_harness: drives one rand_cache with random CPU traffic and checks
// every response (testbench only).
//
// Around the cache sit one scarf_model per way (distinct keys) and a memory
// model that answers line reads and word writes after 1 to 4 cycles and
// sometimes withholds its grant. The CPU side sends reads and byte-masked
// writes to a pool of lines about 1.5 times the cache capacity, half of them
// from a small hot subset, and compares each read with a reference memory
// kept here. It also checks: SETS cycles of reset sweep before ready; read
// hits answer in the third cycle after the grant; a write hit updates the
// cached copy; and, with randomized indexing, WAYS+1 lines that share one
// set index can all be cached at once. Each mechanism (hit, miss, eviction,
// random tie-break, write hit, write miss, memory stall, spread of one
// index over more than WAYS entries) must happen at least once. With FULL
// set the cache is instantiated with no parameter list at all, i.e. at its
// defaults.
module cache_harness #(
  parameter rc_pkg::policy_e POLICY = rc_pkg::RP_VARP,
  parameter int unsigned     SETS   = 64,
  parameter int unsigned     OPS    = 3000,
  parameter bit              FULL   = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int WAYS   = 4;
  localparam int ADDR_W = 22;
  localparam int IDX_W  = $clog2(SETS);
  localparam int LA_W   = ADDR_W - 4;

  logic                          ready;
  logic                          cpu_req = 1'b0;
  logic                          cpu_gnt;
  logic [ADDR_W-1:0]             cpu_addr = '0;
  logic                          cpu_we = 1'b0;
  logic [3:0]                    cpu_be = '0;
  logic [31:0]                   cpu_wdata = '0;
  logic                          cpu_rvalid;
  logic [31:0]                   cpu_rdata;
  logic [47:0]                   rnd_tweak;
  logic [IDX_W-1:0]              rnd_index;
  logic [WAYS-1:0][IDX_W-1:0]    rnd_set;
  logic                          mem_req;
  logic                          mem_gnt;
  logic                          mem_we;
  logic [ADDR_W-1:0]             mem_addr;
  logic [3:0]                    mem_be;
  logic [31:0]                   mem_wdata;
  logic                          mem_rvalid;
  logic [127:0]                  mem_rdata;
  logic                          s_hit, s_miss, s_evict, s_tie;

  if (FULL) begin : g_full
    rand_cache u_dut (
      .clk, .rst_n, .ready_o(ready),
      .cpu_req_i(cpu_req), .cpu_gnt_o(cpu_gnt), .cpu_addr_i(cpu_addr), .cpu_we_i(cpu_we),
      .cpu_be_i(cpu_be), .cpu_wdata_i(cpu_wdata), .cpu_rvalid_o(cpu_rvalid), .cpu_rdata_o(cpu_rdata),
      .rnd_tweak_o(rnd_tweak), .rnd_index_o(rnd_index), .rnd_set_i(rnd_set),
      .mem_req_o(mem_req), .mem_gnt_i(mem_gnt), .mem_we_o(mem_we), .mem_addr_o(mem_addr),
      .mem_be_o(mem_be), .mem_wdata_o(mem_wdata), .mem_rvalid_i(mem_rvalid), .mem_rdata_i(mem_rdata),
      .stat_hit_o(s_hit), .stat_miss_o(s_miss), .stat_evict_o(s_evict), .stat_tie_o(s_tie)
    );
  end else begin : g_small
    rand_cache #(.POLICY(POLICY), .SETS(SETS)) u_dut (
      .clk, .rst_n, .ready_o(ready),
      .cpu_req_i(cpu_req), .cpu_gnt_o(cpu_gnt), .cpu_addr_i(cpu_addr), .cpu_we_i(cpu_we),
      .cpu_be_i(cpu_be), .cpu_wdata_i(cpu_wdata), .cpu_rvalid_o(cpu_rvalid), .cpu_rdata_o(cpu_rdata),
      .rnd_tweak_o(rnd_tweak), .rnd_index_o(rnd_index), .rnd_set_i(rnd_set),
      .mem_req_o(mem_req), .mem_gnt_i(mem_gnt), .mem_we_o(mem_we), .mem_addr_o(mem_addr),
      .mem_be_o(mem_be), .mem_wdata_o(mem_wdata), .mem_rvalid_i(mem_rvalid), .mem_rdata_i(mem_rdata),
      .stat_hit_o(s_hit), .stat_miss_o(s_miss), .stat_evict_o(s_evict), .stat_tie_o(s_tie)
    );
  end

  for (genvar w = 0; w < WAYS; w++) begin : g_scarf
    scarf_model #(.IDX_W(IDX_W), .TWEAK_W(48),
                  .KEY(64'h5DEECE66D_0000 ^ (64'(w + 1) * 64'hD1B5_4A32_D192_ED03))) u_f (
      .tweak(rnd_tweak), .pt(rnd_index), .ct(rnd_set[w])
    );
  end

  // ------------------------------------------------------------ memory
  function automatic logic [31:0] init_word(input int unsigned wa);
    logic [31:0] x;
    x = wa * 32'h9E37_79B1;
    return x ^ (x >> 15) ^ 32'hA5A5_0000;
  endfunction

  logic [31:0] mem_arr [int unsigned];     // memory model contents
  logic [31:0] ref_arr [int unsigned];     // reference seen by the CPU side

  function automatic logic [31:0] mem_word(input int unsigned wa);
    return mem_arr.exists(wa) ? mem_arr[wa] : init_word(wa);
  endfunction
  function automatic logic [31:0] ref_word(input int unsigned wa);
    return ref_arr.exists(wa) ? ref_arr[wa] : init_word(wa);
  endfunction

  int          mem_busy = 0;
  logic        mem_pend_we;
  logic [ADDR_W-1:0] mem_pend_addr;
  int          mem_stalls = 0;
  logic        gnt_rand = 1'b1;

  assign mem_gnt = gnt_rand && (mem_busy == 0);

  always @(negedge clk) gnt_rand <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) begin
    mem_rvalid <= 1'b0;
    if (mem_busy > 1) mem_busy <= mem_busy - 1;
    else if (mem_busy == 1) begin
      mem_busy   <= 0;
      mem_rvalid <= 1'b1;
      for (int i = 0; i < 4; i++)
        mem_rdata[i*32 +: 32] <= mem_word((int'(mem_pend_addr) >> 2 & ~3) + i);
    end
    if (mem_req && !mem_gnt) mem_stalls++;
    if (mem_req && mem_gnt) begin
      mem_busy      <= $urandom_range(1, 4);
      mem_pend_we   <= mem_we;
      mem_pend_addr <= mem_addr;
      if (mem_we) begin
        logic [31:0] v;
        v = mem_word(int'(mem_addr) >> 2);
        for (int b = 0; b < 4; b++) if (mem_be[b]) v[b*8 +: 8] = mem_wdata[b*8 +: 8];
        mem_arr[int'(mem_addr) >> 2] = v;
      end
    end
  end

  // ------------------------------------------------------------ counters
  int n_hit = 0, n_miss = 0, n_evict = 0, n_tie = 0, n_whit = 0, n_wmiss = 0, n_spread = 0;
  always @(posedge clk) begin
    if (s_hit)   n_hit++;
    if (s_miss)  n_miss++;
    if (s_evict) n_evict++;
    if (s_tie)   n_tie++;
  end

  // rvalid only answers a granted request
  int outstanding = 0;
  always @(posedge clk) begin
    if (rst_n && cpu_req && cpu_gnt) outstanding++;
    if (rst_n && cpu_rvalid) begin
      if (outstanding == 0) begin
        failures++;
        $display("FAIL: response without request");
      end else outstanding--;
    end
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL[%0d]: %s", POLICY, msg);
    end
  endtask

  // One CPU access. Returns the response latency (cycles after the grant
  // cycle) and whether the cache reported a hit.
  task automatic access(input logic [ADDR_W-1:0] a, input bit we, input logic [3:0] be,
                        input logic [31:0] wd, output int lat, output bit was_hit);
    logic [31:0] exp;
    @(negedge clk);
    cpu_req = 1'b1; cpu_addr = a; cpu_we = we; cpu_be = be; cpu_wdata = wd;
    while (!cpu_gnt) @(negedge clk);
    exp = ref_word(int'(a) >> 2);
    if (we) begin
      for (int b = 0; b < 4; b++) if (be[b]) exp[b*8 +: 8] = wd[b*8 +: 8];
      ref_arr[int'(a) >> 2] = exp;
    end
    @(negedge clk);
    cpu_req = 1'b0;
    lat = 1;
    was_hit = s_hit;
    while (!cpu_rvalid && lat < 200) begin
      @(negedge clk);
      lat++;
      was_hit |= s_hit;
    end
    chk(cpu_rvalid, "no response");
    if (!we) chk(cpu_rdata == exp, $sformatf("read %h: %h expected %h", a, cpu_rdata, exp));
  endtask

  logic [LA_W-1:0] pool [];

  initial begin
    int lat, cyc;
    bit h;
    logic [LA_W-1:0] la;
    logic [ADDR_W-1:0] a;
    bit all_hit;
    done = 1'b0;
    checks = 0;
    failures = 0;
    @(posedge rst_n);
    cyc = 0;
    while (!ready) begin
      @(negedge clk);
      cyc++;
    end
    chk(cyc >= SETS && cyc <= SETS + 2, $sformatf("reset sweep took %0d cycles", cyc));

    // WAYS+1 lines sharing one set index, accessed twice: with per-way
    // randomized indices they need not conflict.
    for (int g = 0; g < 4; g++) begin
      all_hit = 1'b1;
      for (int pass = 0; pass < 2; pass++)
        for (int t = 0; t < WAYS + 1; t++) begin
          la = LA_W'(((g * 7 + t + 1) << IDX_W) | (g * 13 + 3));
          access({la, 4'h0}, 1'b0, 4'h0, 32'h0, lat, h);
          if (pass == 1) all_hit &= h;
        end
      if (all_hit) n_spread++;
    end

    // random traffic
    pool = new[SETS * WAYS * 3 / 2];
    foreach (pool[i]) pool[i] = LA_W'($urandom);
    for (int op = 0; op < OPS; op++) begin
      bit we;
      logic [3:0] be;
      la = ($urandom_range(0, 1) == 0) ? pool[$urandom_range(0, SETS * WAYS / 4 - 1)]
                                       : pool[$urandom_range(0, SETS * WAYS * 3 / 2 - 1)];
      a  = {la, 2'($urandom), 2'b00};
      we = ($urandom_range(0, 9) < 3);
      be = 4'($urandom_range(1, 15));
      access(a, we, be, $urandom, lat, h);
      if (!we && h) chk(lat == 3, $sformatf("read hit latency %0d, expected 3", lat));
      if (we && h)  n_whit++;
      if (we && !h) n_wmiss++;
      // a written word must read back from the cache
      if (we && h) begin
        access(a, 1'b0, 4'h0, 32'h0, lat, h);
        chk(h, "read after write hit must hit");
      end
    end

    chk(n_hit > 0,    "mechanism never seen: hit");
    chk(n_miss > 0,   "mechanism never seen: miss");
    chk(n_evict > 0,  "mechanism never seen: eviction of a valid line");
    chk(n_tie > 0,    "mechanism never seen: random tie-break on a miss");
    chk(n_whit > 0,   "mechanism never seen: write hit");
    chk(n_wmiss > 0,  "mechanism never seen: write miss");
    chk(mem_stalls > 0, "mechanism never seen: memory stall");
    chk(n_spread > 0, "mechanism never seen: more than WAYS lines of one index cached");
    $display("policy %0d: hits=%0d misses=%0d evictions=%0d ties=%0d write_hits=%0d write_misses=%0d mem_stalls=%0d index_spread=%0d",
             POLICY, n_hit, n_miss, n_evict, n_tie, n_whit, n_wmiss, mem_stalls, n_spread);
    done = 1'b1;
  end
endmodule
